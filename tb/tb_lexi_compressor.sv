// tb_lexi_compressor: decodes the compressor's output in software.
//
// Layers of BF16 values are pushed (skewed exponents, widely spread ones that
// overflow the histogram, a layer cut off inside its training window, input
// gaps and random link back-pressure). Every egress flit is decoded here
// without any help from the RTL: raw flits are read directly, codebook flits
// are collected into {exponent, length} lists from which canonical codes and
// LUT places are rebuilt with the reference model, and data flits are parsed
// by prefix matching against that codebook. The decoded stream must equal the
// pushed stream. The test also requires every phase of the layer sequence to
// appear, the escape leaf to be the last codebook entry, and escapes,
// histogram overflow, lane stalls and arbiter waits to occur.
module tb_lexi_compressor;
  import lexi_pkg::*;
  import lexi_ref_pkg::*;
  localparam int unsigned M = 10;
  logic clk = 1'b0, rst_n = 1'b0;
  always #0.5 clk = ~clk;

  logic         layer_start, in_valid, in_ready, out_valid, out_ready;
  logic [3:0]   in_cnt;
  bf16_t        in_val [M];
  flit_t        out_flit;
  logic [2:0]   st_phase;
  logic [M-1:0] st_hit, st_miss, st_esc;
  logic         st_lane_stall, st_arb_wait, st_hist_overflow, st_unplaced;

  lexi_compressor #(.M(M)) dut (.*);

  int unsigned checks = 0, failures = 0;
  int unsigned c_ph [7], c_raw, c_data, c_cb, c_esc, c_ovf, c_stall, c_arbw;
  bf16_t       expq [$];
  book_t       book, nb;
  bit          placed [32];
  int          stage [32];
  bit          have_book = 0, gaps = 0;
  longint      n_sent = 0, n_dec = 0;

  always @(posedge clk) if (rst_n) begin
    c_ph[st_phase]++;
    c_esc += $countones(st_esc);
    if (st_hist_overflow) c_ovf++;
    if (st_lane_stall) c_stall++;
    if (st_arb_wait) c_arbw++;
    if (in_valid && in_ready && !layer_start)
      for (int i = 0; i < M; i++) if (i < in_cnt) begin expq.push_back(in_val[i]); n_sent++; end
    if (out_valid && out_ready) begin
      bf16_t v [$];
      if (out_flit.kind == FK_CB || out_flit.kind == FK_CB_LAST) begin
        c_cb++;
        if (nb.n == 0) for (int r = 0; r < 32; r++) begin nb.sym[r] = '0; nb.len[r] = 0; nb.code[r] = 0; end
        for (int i = 0; i < int'(out_flit.count); i++) begin
          cb_ent_t e;
          e = out_flit.payload[PAY_W-1-CB_ENT_W*i -: CB_ENT_W];
          nb.sym[nb.n] = e.sym;
          nb.len[nb.n] = e.len;
          nb.n++;
        end
        if (out_flit.kind == FK_CB_LAST) begin
          book = nb;
          canon(book);
          placement(book, placed, stage);
          checks++;
          if (book.code[book.n-1] != (32'(1) << book.len[book.n-1]) - 1 || book.len[book.n-1] == 0) begin
            failures++; $display("FAIL: escape leaf not last / not all ones");
          end
          have_book = 1;
          nb.n = 0;
        end
      end else begin
        checks++;
        if (out_flit.kind == FK_RAW) c_raw++; else c_data++;
        if (out_flit.kind == FK_DATA && !have_book) begin
          failures++; $display("FAIL: data flit before any codebook");
        end else if (!parse(book, out_flit, v)) begin
          failures++; $display("FAIL: undecodable data flit");
        end else begin
          foreach (v[i]) begin
            checks++;
            n_dec++;
            if (expq.size() == 0) begin failures++; $display("FAIL: extra value"); end
            else begin
              bf16_t x;
              x = expq.pop_front();
              if (x != v[i]) begin failures++; $display("FAIL: value %0d: %h vs %h", n_dec, v[i], x); end
            end
          end
        end
      end
    end
  end

  function automatic logic [7:0] skewed();
    int unsigned r, k;
    r = $urandom;
    k = 0;
    while (k < 10 && r[k]) k++;
    return 8'((r[31] ? 125 + k : 124 - k));
  endfunction

  logic acc_q = 1'b0;
  always @(posedge clk) acc_q <= in_valid && in_ready;

  task automatic send_layer(input int kind, input int unsigned nvals);
    int unsigned sent = 0;
    @(negedge clk);
    layer_start = 1'b1; in_valid = 1'b0;
    @(negedge clk);
    layer_start = 1'b0;
    while (sent < nvals) begin
      int unsigned c;
      if (gaps && ($urandom % 4 == 0)) begin in_valid = 0; @(negedge clk); continue; end
      c = (nvals - sent < M) ? nvals - sent : M;
      if (gaps && ($urandom % 3 == 0)) c = 1 + $urandom % c;
      for (int i = 0; i < M; i++) begin
        in_val[i] = 16'($urandom);
        in_val[i].exp = (kind == 1) ? 8'(90 + $urandom % 45) : skewed();
      end
      in_cnt = 4'(c); in_valid = 1'b1;
      do @(negedge clk); while (!acc_q);
      sent += c;
    end
    in_valid = 0;
  endtask

  always @(negedge clk) out_ready = gaps ? ($urandom % 3 != 0) : 1'b1;

  initial begin
    layer_start = 0; in_valid = 0; in_cnt = 0; nb.n = 0; book.n = 0;
    foreach (in_val[i]) in_val[i] = '0;
    foreach (c_ph[i]) c_ph[i] = 0;
    {c_raw, c_data, c_cb, c_esc, c_ovf, c_stall, c_arbw} = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    send_layer(0, 6000);
    send_layer(1, 4000);
    gaps = 1;
    send_layer(0, 4000);
    send_layer(0, 200);
    gaps = 0;
    send_layer(0, 3000);
    @(negedge clk);
    layer_start = 1;      // flushes nothing; ends the last layer's stream
    @(negedge clk);
    layer_start = 0;
    repeat (400) @(negedge clk);
    $display("phase cycles train %0d flush %0d sort %0d tree %0d assign %0d cb %0d comp %0d",
             c_ph[0], c_ph[1], c_ph[2], c_ph[3], c_ph[4], c_ph[5], c_ph[6]);
    $display("flits raw %0d data %0d codebook %0d; escapes %0d overflow %0d stalls %0d arbiter waits %0d",
             c_raw, c_data, c_cb, c_esc, c_ovf, c_stall, c_arbw);
    checks += 3;
    if (n_dec != n_sent || expq.size() != 0) begin failures++; $display("FAIL: sent %0d decoded %0d", n_sent, n_dec); end
    for (int p = 0; p < 7; p++) if (c_ph[p] == 0) begin failures++; $display("FAIL: phase %0d never seen", p); end
    if (c_raw == 0 || c_data == 0 || c_cb == 0 || c_esc == 0 || c_ovf == 0 || c_stall == 0 || c_arbw == 0) begin
      failures++; $display("FAIL: a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
