// tb_lexi_decompressor: feeds reference-built flit streams to the decoder.
//
// Each round sends a random complete codebook (2..32 leaves, escape last) as
// FK_CB/FK_CB_LAST flits of up to seven {exponent, length} entries, then a
// mix of data flits built by the reference model (mostly codebook exponents,
// some escapes) and raw flits. A new codebook follows immediately while data
// of the old one may still be inside the lanes, so the drain-before-reload
// path is exercised. Values must come out bit-exact and in order, with random
// input gaps and output back-pressure; every decoder stage, escapes and each
// codebook load must be seen, and err must never rise.
module tb_lexi_decompressor;
  import lexi_pkg::*;
  import lexi_ref_pkg::*;
  localparam int unsigned M = 10;
  logic clk = 1'b0, rst_n = 1'b0;
  always #0.5 clk = ~clk;

  logic        in_valid, in_ready, out_valid, out_ready;
  flit_t       in_flit;
  logic [3:0]  out_cnt;
  bf16_t       out_val [NMAX];
  logic [DEC_STAGES-1:0] st_hit_stage;
  logic        st_esc, st_err, st_cb_loaded;

  lexi_decompressor #(.M(M)) dut (.*);

  int unsigned checks = 0, failures = 0, c_st [4], c_esc = 0, c_cbl = 0, n_books = 0;
  bf16_t       expq [$];
  longint      n_sent = 0, n_recv = 0;

  always @(posedge clk) if (rst_n) begin
    for (int s = 0; s < 4; s++) if (st_hit_stage[s]) c_st[s]++;
    if (st_esc) c_esc++;
    if (st_cb_loaded) c_cbl++;
    if (st_err) begin failures++; $display("FAIL: decoder error"); end
    if (out_valid && out_ready) for (int i = 0; i < NMAX; i++) if (i < out_cnt) begin
      bf16_t x;
      checks++;
      n_recv++;
      if (expq.size() == 0) begin failures++; $display("FAIL: extra value"); end
      else begin
        x = expq.pop_front();
        if (x != out_val[i]) begin failures++; $display("FAIL: value %0d: %h vs %h", n_recv, out_val[i], x); end
      end
    end
  end

  always @(negedge clk) out_ready = ($urandom % 4 != 0);

  task automatic send(input flit_t f);
    @(negedge clk);
    while ($urandom % 5 == 0) begin in_valid = 0; @(negedge clk); end
    in_flit = f; in_valid = 1;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    @(negedge clk);
    in_valid = 0;
  endtask

  initial begin
    in_valid = 0; in_flit = '0;
    foreach (c_st[i]) c_st[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 40; k++) begin
      int unsigned lens [$];
      book_t b;
      bit    placed [32];
      int    stage [32];
      int unsigned nn, r;
      nn = 2 + $urandom % 31;
      if (k % 2 == 0) nn = 32;
      lens = '{1, 1};
      while (lens.size() < nn) begin
        int i;
        i = $urandom % lens.size();
        if (lens[i] < 20) begin
          int unsigned l;
          l = lens[i];
          lens.delete(i);
          lens.push_back(l + 1);
          lens.push_back(l + 1);
        end
      end
      lens.sort();
      b.n = nn;
      for (int q = 0; q < 32; q++) begin
        b.sym[q]  = 8'(q * 3 + 7 * k);
        b.len[q]  = (q < int'(nn)) ? lens[q] : 0;
        b.code[q] = 0;
      end
      canon(b);
      placement(b, placed, stage);
      // codebook flits
      r = 0;
      while (r < nn) begin
        flit_t f;
        int unsigned c;
        c = (nn - r < CB_MAX) ? nn - r : CB_MAX;
        f.kind = (r + c == nn) ? FK_CB_LAST : FK_CB;
        f.count = 4'(c);
        f.payload = '0;
        for (int i = 0; i < int'(c); i++)
          f.payload[PAY_W-1-CB_ENT_W*i -: CB_ENT_W] = {b.sym[r+i], LEN_W'(b.len[r+i])};
        send(f);
        r += c;
      end
      n_books++;
      // data and raw flits
      for (int j = 0; j < 60; j++) begin
        bf16_t v [$];
        flit_t f;
        int unsigned bits;
        v.delete();
        bits = 0;
        if ($urandom % 8 == 0) begin
          int unsigned rc;
          rc = 1 + $urandom % RAW_MAX;
          f.kind = FK_RAW; f.count = 4'(rc); f.payload = '0;
          for (int i = 0; i < int'(rc); i++) begin
            bf16_t x; x = 16'($urandom); v.push_back(x);
            f.payload[PAY_W-1-16*i -: 16] = x;
          end
        end else begin
          while (v.size() < NMAX) begin
            bf16_t x;
            x = 16'($urandom);
            if ($urandom % 10 != 0) x.exp = b.sym[$urandom % (nn - 1)];
            if (bits + bits_of(b, placed, x) > PAY_W) break;
            bits += bits_of(b, placed, x);
            v.push_back(x);
          end
          f = mk_data(b, placed, v);
        end
        foreach (v[i]) begin expq.push_back(v[i]); n_sent++; end
        send(f);
      end
    end
    while (expq.size() != 0) @(negedge clk);
    repeat (20) @(negedge clk);
    $display("values %0d, stage hits %0d/%0d/%0d/%0d, escapes %0d, codebooks loaded %0d of %0d",
             n_recv, c_st[0], c_st[1], c_st[2], c_st[3], c_esc, c_cbl, n_books);
    checks += 2;
    if (n_recv != n_sent || c_cbl != n_books) begin failures++; $display("FAIL: counts"); end
    if (c_st[0] == 0 || c_st[1] == 0 || c_st[2] == 0 || c_st[3] == 0 || c_esc == 0) begin
      failures++; $display("FAIL: a decoder stage never used");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
