// tb_local_cache: checks the per-lane frequency cache against a FIFO model.
//
// Random exponents (from a small alphabet, then a larger one) are fed while
// the histogram side accepts evictions at random. A queue model of the cache
// predicts every eviction {exponent, count} in order and every hit; after a
// flush the per-exponent totals of all evictions must equal the number of
// times each exponent was sent.
module tb_local_cache;
  import lexi_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #0.5 clk = ~clk;

  logic             clear, in_valid, in_ready, flush, ev_valid, ev_ready, empty, hit, miss;
  logic [EXP_W-1:0] in_exp, ev_sym;
  logic [CNT_W-1:0] ev_cnt;

  local_cache #(.DEPTH(8)) dut (.*);

  int unsigned checks = 0, failures = 0;
  int unsigned sent [256], got [256];
  logic [7:0]  msym [$];
  int unsigned mcnt [$];
  logic [7:0]  xsym [$];
  int unsigned xcnt [$];
  int unsigned nhit = 0, mhit = 0;

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      int idx;
      sent[in_exp]++;
      idx = -1;
      foreach (msym[i]) if (msym[i] == in_exp) idx = i;
      if (idx >= 0) begin mcnt[idx]++; mhit++; end
      else begin
        if (msym.size() == 8) begin
          xsym.push_back(msym.pop_front());
          xcnt.push_back(mcnt.pop_front());
        end
        msym.push_back(in_exp);
        mcnt.push_back(1);
      end
    end
    if (hit) nhit++;
    if (ev_valid && ev_ready) begin
      // during a flush the cache empties oldest first
      if (xsym.size() == 0 && flush && msym.size() != 0) begin
        xsym.push_back(msym.pop_front());
        xcnt.push_back(mcnt.pop_front());
      end
      got[ev_sym] += ev_cnt;
      checks++;
      if (xsym.size() == 0 || xsym[0] != ev_sym || xcnt[0] != ev_cnt) begin
        failures++;
        $display("FAIL: eviction %0d/%0d, expected %0d/%0d", ev_sym, ev_cnt,
                 xsym.size() ? xsym[0] : 0, xcnt.size() ? xcnt[0] : 0);
      end
      if (xsym.size()) begin void'(xsym.pop_front()); void'(xcnt.pop_front()); end
    end
  end

  initial begin
    clear = 0; in_valid = 0; in_exp = 0; flush = 0; ev_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int phase = 0; phase < 2; phase++) begin
      for (int k = 0; k < 2000; k++) begin
        @(negedge clk);
        in_valid = ($urandom % 4 != 0);
        in_exp   = (phase == 0) ? 8'(120 + $urandom % 6) : 8'(110 + ($urandom % 20));
        ev_ready = ($urandom % 3 == 0);
      end
    end
    @(negedge clk);
    in_valid = 0;
    // drain: flush with a slow histogram side
    flush = 1;
    while (!empty) begin
      @(negedge clk);
      ev_ready = ($urandom % 2 == 0);
    end
    flush = 0;
    ev_ready = 0;
    @(negedge clk);
    for (int s = 0; s < 256; s++) begin
      checks++;
      if (sent[s] != got[s]) begin
        failures++;
        $display("FAIL: exponent %0d sent %0d times, histogram got %0d", s, sent[s], got[s]);
      end
    end
    checks++;
    if (nhit != mhit || nhit == 0) begin
      failures++;
      $display("FAIL: hits %0d, model %0d", nhit, mhit);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
