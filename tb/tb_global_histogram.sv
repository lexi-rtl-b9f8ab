// tb_global_histogram: checks accumulation, slot allocation and overflow.
//
// Updates arrive at most once every three cycles (as the arbiter spaces
// them). The model sums counts per exponent; the first 31 distinct exponents
// own a slot, any later one must raise overflow and be dropped. At the end
// every slot and the escape entry are compared with the model. A second
// round after clear checks that the table really empties.
module tb_global_histogram;
  import lexi_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #0.5 clk = ~clk;

  logic             clear, upd_valid, idle, overflow;
  logic [EXP_W-1:0] upd_sym;
  logic [CNT_W-1:0] upd_cnt;
  hist_ent_t        hist [NSYM];

  global_histogram dut (.*);

  int unsigned checks = 0, failures = 0, novf = 0, xovf = 0;
  int unsigned model [int];
  int          owners [$];

  always @(posedge clk) if (rst_n && overflow) novf++;

  task automatic upd(input logic [7:0] s, input int unsigned c);
    @(negedge clk);
    upd_valid = 1; upd_sym = s; upd_cnt = CNT_W'(c);
    @(negedge clk);
    upd_valid = 0;
    repeat (1 + $urandom % 3) @(negedge clk);
    if (!model.exists(s)) begin
      if (owners.size() < 31) begin owners.push_back(s); model[s] = 0; end
    end
    if (model.exists(s)) model[s] += c; else xovf++;
  endtask

  task automatic compare();
    int found;
    for (int i = 0; i < 31; i++) begin
      if (hist[i].valid) begin
        checks++;
        if (!model.exists(hist[i].sym) || model[hist[i].sym] != hist[i].cnt) begin
          failures++;
          $display("FAIL: slot %0d holds %0d/%0d", i, hist[i].sym, hist[i].cnt);
        end
      end
    end
    foreach (model[s]) begin
      found = 0;
      for (int i = 0; i < 31; i++) if (hist[i].valid && hist[i].sym == s) found++;
      checks++;
      if (found != 1) begin failures++; $display("FAIL: exponent %0d in %0d slots", s, found); end
    end
    checks++;
    if (!(hist[31].valid && hist[31].cnt == 0)) begin failures++; $display("FAIL: escape entry"); end
    checks++;
    if (novf != xovf) begin failures++; $display("FAIL: overflow %0d, expected %0d", novf, xovf); end
  endtask

  initial begin
    clear = 0; upd_valid = 0; upd_sym = 0; upd_cnt = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 300; k++) upd(8'(100 + $urandom % 12), 1 + $urandom % 40);
    repeat (4) @(negedge clk);
    compare();
    // clear, then more than 31 distinct exponents
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    model.delete(); owners.delete(); novf = 0; xovf = 0;
    for (int k = 0; k < 400; k++) upd(8'(60 + $urandom % 45), 1 + $urandom % 9);
    repeat (4) @(negedge clk);
    compare();
    checks++;
    if (xovf == 0 || !idle) begin failures++; $display("FAIL: no overflow case / not idle"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
