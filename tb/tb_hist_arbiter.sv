// tb_hist_arbiter: checks first-come grants and the three-cycle hold.
//
// Ten requesters raise requests at random and hold them until granted. A
// queue model records arrivals in order (same-cycle arrivals by index) and
// predicts each grant: the oldest waiting request, one grant at most every
// three cycles, never a grant while the port is held.
module tb_hist_arbiter;
  localparam int M = 10;
  logic clk = 1'b0, rst_n = 1'b0;
  always #0.5 clk = ~clk;

  logic [M-1:0] req, gnt;
  logic [3:0]   gnt_idx;
  logic         busy;

  hist_arbiter #(.M(M), .HOLD(3)) dut (.*);

  int unsigned checks = 0, failures = 0, grants = 0, waits = 0;
  int          order [$];
  logic [M-1:0] known = '0;
  int          hold = 0;

  always @(posedge clk) if (rst_n) begin
    int exp_i;
    exp_i = (hold == 0 && order.size() != 0) ? order[0] : -1;
    checks++;
    if ((exp_i < 0 && gnt != '0) || (exp_i >= 0 && (gnt != (M'(1) << exp_i) || gnt_idx != 4'(exp_i)))) begin
      failures++;
      $display("FAIL: t=%0t grant %b, expected lane %0d", $time, gnt, exp_i);
    end
    if (order.size() > 1) waits++;
    if (hold > 0) hold--;
    if (gnt != '0) begin
      grants++;
      hold = 2;
      void'(order.pop_front());
      known[gnt_idx] = 1'b0;
    end
    for (int i = 0; i < M; i++) if (req[i] && !known[i] && !gnt[i]) begin
      order.push_back(i);
      known[i] = 1'b1;
    end
  end

  initial begin
    req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk);
      // drop a granted request, raise new ones at random
      for (int i = 0; i < M; i++) begin
        if (gnt_q[i]) req[i] = 1'b0;
        else if (!req[i] && ($urandom % 16 == 0)) req[i] = 1'b1;
      end
    end
    // stop raising; let the waiting ones be served
    repeat (100) begin
      @(negedge clk);
      req = req & ~gnt_q;
    end
    checks++;
    if (grants < 500 || waits == 0) begin
      failures++;
      $display("FAIL: %0d grants, %0d cycles with waiting requests", grants, waits);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [M-1:0] gnt_q;
  always @(posedge clk) gnt_q <= gnt;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
