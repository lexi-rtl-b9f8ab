// tb_dec_lane: checks one decode lane against the reference flit builder.
//
// Each round makes a random complete code of 2..32 leaves (escape last),
// assigns canonical codes and LUT places with the reference model, and
// programs the lane with a clear word followed by one word per placed rank.
// Random data flits (as many values as fit; most exponents from the codebook,
// some not, which forces escapes) and raw flits are then decoded. Every value
// must come back unchanged, the stage strobes must match the stage each
// codeword was placed in, and the decode time must be the sum of the per-code
// stage depths (escape: 4) plus a fixed overhead. Output back-pressure is
// random.
module tb_dec_lane;
  import lexi_pkg::*;
  import lexi_ref_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #0.5 clk = ~clk;

  lut_prog_t prog;
  logic      in_valid, in_ready, out_valid, out_ready, esc_hit, err;
  flit_t     in_flit;
  logic [3:0] out_cnt;
  bf16_t     out_val [NMAX];
  logic [DEC_STAGES-1:0] hit_stage;

  dec_lane dut (.*);

  int unsigned checks = 0, failures = 0;
  int unsigned seen_st [5], exp_st [5];
  int          ovh = -1;

  always @(posedge clk) if (rst_n) begin
    for (int s = 0; s < 4; s++) if (hit_stage[s]) seen_st[s]++;
    if (esc_hit) seen_st[4]++;
    if (err) begin failures++; $display("FAIL: err raised on a valid stream"); end
  end

  initial begin
    prog = '0; in_valid = 0; in_flit = '0; out_ready = 0;
    foreach (seen_st[i]) begin seen_st[i] = 0; exp_st[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 120; k++) begin
      int unsigned lens [$];
      book_t b;
      bit    placed [32];
      int    stage [32], fill [4];
      int unsigned nn;
      nn = 2 + $urandom % 31;
      if (k % 3 == 0) nn = 32;
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
      for (int r = 0; r < 32; r++) begin
        b.sym[r]  = 8'(r * 5 + 3 * k);
        b.len[r]  = (r < int'(nn)) ? lens[r] : 0;
        b.code[r] = 0;
      end
      canon(b);
      placement(b, placed, stage);
      // program: clear, then every placed rank
      @(negedge clk);
      prog = '0; prog.clr = 1;
      fill = '{0, 0, 0, 0};
      for (int r = 0; r < 32; r++) begin
        if (placed[r]) begin
          @(negedge clk);
          prog = '0;
          prog.we = 1; prog.place = 1; prog.stage = 2'(stage[r]); prog.slot = 3'(fill[stage[r]]);
          prog.sym = b.sym[r]; prog.code = LMAX'(b.code[r]); prog.len = LEN_W'(b.len[r]);
          fill[stage[r]]++;
        end
      end
      @(negedge clk);
      prog = '0;
      for (int f = 0; f < 25; f++) begin
        bf16_t       v [$], got [$];
        flit_t       fl;
        int unsigned bits, sum, t;
        v.delete();
        bits = 0; sum = 0;
        if ($urandom % 6 == 0) begin
          int unsigned rc;
          rc = 1 + $urandom % RAW_MAX;
          fl.kind = FK_RAW;
          fl.count = 4'(rc);
          fl.payload = '0;
          for (int i = 0; i < int'(rc); i++) begin
            bf16_t x; x = 16'($urandom); v.push_back(x);
            fl.payload[PAY_W-1-16*i -: 16] = x;
          end
        end else begin
          while (v.size() < NMAX) begin
            bf16_t x;
            x = 16'($urandom);
            if ($urandom % 8 != 0) x.exp = b.sym[$urandom % (nn - 1)];
            if (bits + bits_of(b, placed, x) > PAY_W) break;
            bits += bits_of(b, placed, x);
            v.push_back(x);
          end
          fl = mk_data(b, placed, v);
          foreach (v[i]) begin
            int s; s = 4;
            for (int r = 0; r < int'(nn) - 1; r++) if (placed[r] && b.sym[r] == v[i].exp) s = stage[r];
            exp_st[s]++;
            sum += (s == 4) ? 4 : s + 1;
          end
        end
        // send
        in_flit = fl; in_valid = 1;
        @(posedge clk); while (!in_ready) @(posedge clk);
        @(negedge clk); in_valid = 0;
        t = 1;
        while (!out_valid) begin @(negedge clk); t++; end
        repeat ($urandom % 3) @(negedge clk);
        out_ready = 1;
        checks++;
        if (out_cnt != fl.count) begin failures++; $display("FAIL: count %0d vs %0d", out_cnt, fl.count); end
        foreach (v[i]) begin
          checks++;
          if (out_val[i] != v[i]) begin
            failures++; $display("FAIL: book %0d flit %0d value %0d: %h vs %h", k, f, i, out_val[i], v[i]);
          end
        end
        if (fl.kind == FK_DATA) begin
          checks++;
          if (ovh < 0) ovh = int'(t) - int'(sum);
          else if (int'(t) - int'(sum) != ovh) begin
            failures++; $display("FAIL: %0d cycles for stage sum %0d (overhead %0d)", t, sum, ovh);
          end
        end
        @(negedge clk);
        out_ready = 0;
      end
    end
    repeat (3) @(negedge clk);
    $display("stage hits %0d/%0d/%0d/%0d escapes %0d, fixed overhead %0d cycles",
             seen_st[0], seen_st[1], seen_st[2], seen_st[3], seen_st[4], ovh);
    for (int s = 0; s < 5; s++) begin
      checks++;
      if (seen_st[s] != exp_st[s] || seen_st[s] == 0) begin
        failures++; $display("FAIL: stage %0d strobes %0d expected %0d", s, seen_st[s], exp_st[s]);
      end
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
