// tb_lexi_top: end-to-end test of the codec pair at its default size.
//
// The egress flits are looped back into the ingress side, so every value
// sent must come back bit-exact and in order. Four layers are sent, each
// with a fresh codebook:
//   0  narrow, skewed exponents (typical activations), continuous input
//   1  40 distinct, evenly used exponents: histogram overflow, escapes,
//      long codes decoded in stages 3 and 4
//   2  skewed exponents with input gaps and link/consumer back-pressure
//   3  a layer shorter than the training window, cut off by the next layer
//   4  skewed again, to end on a compressed stream
// Besides the data check it counts every mechanism of the design (raw,
// codebook and data flits, cache hits/misses, lane stalls, arbiter
// contention, escapes, each decoder stage, codebook reloads) and fails any
// that never happened. It also checks the codebook build time (sort 15 +
// tree <= 31 + assignment 33 cycles), that compressed flits carry more
// values than raw ones, and that the egress fills every cycle the link is
// ready while compressing a continuous stream.
module tb_lexi_top;
  import lexi_pkg::*;

  localparam int unsigned M = 10;

  logic clk = 1'b0, rst_n = 1'b0;
  always #0.5 clk = ~clk;

  logic              layer_start;
  logic              tx_valid, tx_ready;
  logic [3:0]        tx_cnt;
  bf16_t             tx_val [M];
  logic              f_valid, f_ready, rx_flit_ready;
  flit_t             f;
  logic              rx_valid, rx_ready;
  logic [3:0]        rx_cnt;
  bf16_t             rx_val [NMAX];
  logic [2:0]        st_phase;
  logic [M-1:0]      st_hit, st_miss, st_esc;
  logic              st_lane_stall, st_arb_wait, st_hist_overflow, st_unplaced;
  logic [3:0]        st_dec_stage;
  logic              st_dec_esc, st_dec_err, st_cb_loaded;
  logic              link_ok;

  assign f_ready = rx_flit_ready && link_ok;

  lexi_top dut (
    .clk, .rst_n, .layer_start,
    .tx_valid, .tx_cnt, .tx_val, .tx_ready,
    .tx_flit_valid(f_valid), .tx_flit(f), .tx_flit_ready(f_ready),
    .rx_flit_valid(f_valid && link_ok), .rx_flit(f), .rx_flit_ready,
    .rx_valid, .rx_cnt, .rx_val, .rx_ready,
    .st_phase, .st_hit, .st_miss, .st_lane_stall, .st_arb_wait, .st_esc,
    .st_hist_overflow, .st_unplaced, .st_dec_stage, .st_dec_esc, .st_dec_err,
    .st_cb_loaded
  );

  int unsigned checks = 0, failures = 0;
  bf16_t       expq [$];
  longint      n_sent = 0, n_recv = 0;

  // event counters
  int unsigned c_raw_f, c_cb_f, c_data_f, c_data_vals, c_raw_vals, c_hit, c_miss,
               c_stall, c_arbw, c_esc, c_ovf, c_unpl, c_dst [4], c_desc, c_cbl,
               c_txbp, c_linkbp, c_rxbp, c_err, c_maxrun, c_run;
  int unsigned t_flush_end, t_cb_start, build_lat [$];
  logic        gaps, bp;

  function automatic bf16_t mk(input logic [7:0] e);
    bf16_t v;
    v.sign = 1'($urandom);
    v.man  = 7'($urandom);
    v.exp  = e;
    return v;
  endfunction

  // skewed exponents around 122: |offset| is geometric
  function automatic logic [7:0] skewed();
    int unsigned r, k;
    r = $urandom;
    k = 0;
    while (k < 12 && r[k]) k++;
    return 8'((r[31] ? 122 + k : 121 - k));
  endfunction

  function automatic logic [7:0] wide();
    return 8'(100 + ($urandom % 40));
  endfunction

  task automatic send_layer(input int kind, input int unsigned nvals);
    int unsigned sent = 0;
    @(negedge clk);
    layer_start <= 1'b1;
    tx_valid    <= 1'b0;
    @(negedge clk);
    layer_start <= 1'b0;
    while (sent < nvals) begin
      int unsigned c;
      if (gaps && ($urandom % 4 == 0)) begin
        tx_valid <= 1'b0;
        @(negedge clk);
        continue;
      end
      c = (nvals - sent < M) ? nvals - sent : M;
      if (gaps && ($urandom % 3 == 0)) c = 1 + $urandom % c;
      for (int i = 0; i < M; i++) tx_val[i] <= mk(kind == 1 ? wide() : skewed());
      tx_cnt   <= 4'(c);
      tx_valid <= 1'b1;
      do @(negedge clk); while (!acc_q);
      sent += c;
    end
    tx_valid <= 1'b0;
  endtask

  // scoreboard: record what the egress accepted
  logic acc_q = 1'b0;
  always @(posedge clk) acc_q <= tx_valid && tx_ready;
  always @(posedge clk) if (rst_n && tx_valid && tx_ready && !layer_start) begin
    for (int i = 0; i < M; i++) if (i < tx_cnt) begin
      expq.push_back(tx_val[i]);
      n_sent++;
    end
  end

  always @(posedge clk) if (rst_n && rx_valid && rx_ready) begin
    for (int i = 0; i < NMAX; i++) if (i < rx_cnt) begin
      checks++;
      n_recv++;
      if (expq.size() == 0) begin
        failures++;
        $display("FAIL: unexpected value %h", rx_val[i]);
      end else begin
        bf16_t e;
        e = expq.pop_front();
        if (rx_val[i] != e) begin
          failures++;
          if (failures < 10) $display("FAIL: value %0d got %h expected %h", n_recv, rx_val[i], e);
        end
      end
    end
  end

  // event counting
  always @(posedge clk) if (rst_n) begin
    if (f_valid && f_ready) begin
      unique case (f.kind)
        FK_RAW:  begin c_raw_f++;  c_raw_vals  += f.count; end
        FK_DATA: begin c_data_f++; c_data_vals += f.count; end
        default: c_cb_f++;
      endcase
    end
    c_hit  += $countones(st_hit);
    c_miss += $countones(st_miss);
    c_esc  += $countones(st_esc);
    if (st_lane_stall) c_stall++;
    if (st_arb_wait) c_arbw++;
    if (st_hist_overflow) c_ovf++;
    if (st_unplaced) c_unpl++;
    for (int s = 0; s < 4; s++) if (st_dec_stage[s]) c_dst[s]++;
    if (st_dec_esc) c_desc++;
    if (st_dec_err) c_err++;
    if (st_cb_loaded) c_cbl++;
    if (tx_valid && !tx_ready) c_txbp++;
    if (f_valid && !f_ready) c_linkbp++;
    if (rx_valid && !rx_ready) c_rxbp++;
    // while compressing with data offered, the egress never leaves a ready
    // link idle; count the flit slots used and any bubble
    if (st_phase == 3'd6 && tx_valid && f_ready && !gaps) begin
      if (f_valid) c_run++;
      else         c_maxrun++;
    end
    // codebook build latency: end of flush to start of codebook flits
    if (st_phase == 3'd1 && dut.u_comp.flushed) t_flush_end = $time;
    if (st_phase == 3'd4 && dut.u_comp.u_assign.done) build_lat.push_back(int'($time) - t_flush_end);
  end

  // link and consumer back-pressure, only while bp is set
  always @(posedge clk) begin
    link_ok  <= !bp || ($urandom % 5 != 0);
    rx_ready <= !bp || ($urandom % 3 != 0);
  end

  task automatic expect_event(input string name, input int unsigned n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("FAIL: mechanism never happened: %s", name);
    end
  endtask

  initial begin
    int unsigned timeout;
    layer_start = 1'b0; tx_valid = 1'b0; tx_cnt = '0; gaps = 1'b0; bp = 1'b0;
    link_ok = 1'b1; rx_ready = 1'b1;
    for (int i = 0; i < M; i++) tx_val[i] = '0;
    {c_raw_f, c_cb_f, c_data_f, c_data_vals, c_raw_vals, c_hit, c_miss, c_stall, c_arbw,
     c_esc, c_ovf, c_unpl, c_desc, c_cbl, c_txbp, c_linkbp, c_rxbp, c_err, c_maxrun, c_run} = '0;
    for (int s = 0; s < 4; s++) c_dst[s] = 0;
    t_flush_end = 0;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    send_layer(0, 30000);
    send_layer(1, 6000);
    gaps = 1'b1; bp = 1'b1;
    send_layer(2, 6000);
    gaps = 1'b0; bp = 1'b0;
    send_layer(0, 300);
    send_layer(0, 30000);
    timeout = 0;
    while (n_recv < n_sent && timeout < 20000) begin
      @(posedge clk);
      timeout++;
    end
    checks++;
    if (n_recv != n_sent || expq.size() != 0) begin
      failures++;
      $display("FAIL: sent %0d values, received %0d", n_sent, n_recv);
    end
    $display("flits: raw %0d (%0d values), codebook %0d, data %0d (%0d values)",
             c_raw_f, c_raw_vals, c_cb_f, c_data_f, c_data_vals);
    $display("cache hits %0d misses %0d, lane stalls %0d, arbiter waits %0d, hist overflow %0d",
             c_hit, c_miss, c_stall, c_arbw, c_ovf);
    $display("escapes enc %0d dec %0d, unplaced %0d, decoder stages %0d/%0d/%0d/%0d, codebooks %0d",
             c_esc, c_desc, c_unpl, c_dst[0], c_dst[1], c_dst[2], c_dst[3], c_cbl);
    $display("back-pressure: tx %0d link %0d rx %0d, egress slots used %0d idle %0d, builds %p",
             c_txbp, c_linkbp, c_rxbp, c_run, c_maxrun, build_lat);
    expect_event("raw flit", c_raw_f);
    expect_event("codebook flit", c_cb_f);
    expect_event("data flit", c_data_f);
    expect_event("cache hit", c_hit);
    expect_event("cache miss", c_miss);
    expect_event("lane stall", c_stall);
    expect_event("arbiter contention", c_arbw);
    expect_event("encoder escape", c_esc);
    expect_event("decoder escape", c_desc);
    expect_event("histogram overflow", c_ovf);
    for (int s = 0; s < 4; s++) expect_event($sformatf("decoder stage %0d", s + 1), c_dst[s]);
    expect_event("codebook load", c_cbl);
    expect_event("egress back-pressure", c_txbp);
    expect_event("link back-pressure", c_linkbp);
    expect_event("ingress back-pressure", c_rxbp);
    // four complete layers build a codebook; layer 3 is cut off in training
    checks++;
    if (c_cbl != 4 || build_lat.size() != 4) begin
      failures++;
      $display("FAIL: %0d codebooks loaded, %0d built, expected 4", c_cbl, build_lat.size());
    end
    foreach (build_lat[i]) begin
      checks++;
      if (build_lat[i] > 15 + 31 + 33 + 2) begin
        failures++;
        $display("FAIL: codebook build took %0d cycles", build_lat[i]);
      end
    end
    checks++;
    if (c_data_vals * c_raw_f <= c_raw_vals * c_data_f) begin
      failures++;
      $display("FAIL: compressed flits carry no more values than raw flits");
    end
    checks++;
    if (c_maxrun != 0 || c_run < 1000) begin
      failures++;
      $display("FAIL: egress left %0d ready link slots idle (used %0d)", c_maxrun, c_run);
    end
    checks++;
    if (c_err != 0) begin
      failures++;
      $display("FAIL: decoder reported %0d corrupt codewords", c_err);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
