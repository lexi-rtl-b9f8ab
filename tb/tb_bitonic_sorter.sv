// tb_bitonic_sorter: checks order, contents and the 15-cycle latency.
//
// Random sets of 32 entries (with ties, empty slots and the escape entry)
// enter on back-to-back and spaced cycles. Each output must appear exactly
// 15 cycles after its input, be sorted by {count, valid} from largest down,
// and hold the same entries as the input.
module tb_bitonic_sorter;
  import lexi_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #0.5 clk = ~clk;

  logic      in_valid, out_valid;
  hist_ent_t din [NSYM], dout [NSYM];

  bitonic_sorter #(.N(NSYM)) dut (.*);

  int unsigned checks = 0, failures = 0, cyc = 0, nin = 0, nout = 0;
  typedef struct { int unsigned t; hist_ent_t e [NSYM]; } rec_t;
  rec_t pend [$];

  function automatic logic [CNT_W:0] key(input hist_ent_t e);
    return {e.cnt, e.valid};
  endfunction

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (in_valid) begin rec_t r; r.t = cyc; r.e = din; pend.push_back(r); nin++; end
    if (out_valid) begin
      rec_t r;
      int   used [NSYM];
      nout++;
      r = pend.pop_front();
      checks++;
      if (cyc - r.t != 15) begin failures++; $display("FAIL: latency %0d", cyc - r.t); end
      for (int i = 0; i + 1 < NSYM; i++) begin
        checks++;
        if (key(dout[i]) < key(dout[i+1])) begin failures++; $display("FAIL: order at %0d", i); end
      end
      foreach (used[i]) used[i] = 0;
      for (int i = 0; i < NSYM; i++) begin
        int f;
        f = -1;
        for (int j = 0; j < NSYM; j++) if (f < 0 && !used[j] && r.e[j] == dout[i]) f = j;
        checks++;
        if (f < 0) begin failures++; $display("FAIL: entry %0d not from the input", i); end
        else used[f] = 1;
      end
    end
  end

  initial begin
    in_valid = 0;
    foreach (din[i]) din[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 200; k++) begin
      @(negedge clk);
      in_valid = ($urandom % 2 == 0);
      for (int i = 0; i < NSYM; i++) begin
        din[i].valid = ($urandom % 5 != 0);
        din[i].sym   = 8'($urandom);
        din[i].cnt   = din[i].valid ? CNT_W'($urandom % 50) : '0;
      end
      din[NSYM-1] = '{valid: 1'b1, sym: '0, cnt: '0};
    end
    @(negedge clk);
    in_valid = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (nin != nout || nin == 0) begin failures++; $display("FAIL: %0d in, %0d out", nin, nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
