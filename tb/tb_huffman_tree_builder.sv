// tb_huffman_tree_builder: checks optimality, completeness and timing.
//
// Random rank-sorted lists of 2..32 leaves (the last is the escape leaf with
// weight 0) are built into code lengths. Each result must (1) have the cost
// sum(weight x length) of an optimal Huffman code, computed here by a plain
// software merge, (2) satisfy Kraft's equality (a complete prefix code),
// (3) give the escape leaf the longest length, and (4) be ready n cycles
// after start: the load cycle plus one merge per cycle for n-1 merges.
module tb_huffman_tree_builder;
  import lexi_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #0.5 clk = ~clk;

  logic       start, busy, done;
  hist_ent_t  din [NSYM];
  cb_ent_t    dout [NSYM];
  logic [5:0] n;

  huffman_tree_builder dut (.*);

  int unsigned checks = 0, failures = 0;

  function automatic longint opt_cost(input int unsigned w [$]);
    longint c = 0;
    while (w.size() > 1) begin
      int unsigned a, b;
      w.sort();
      a = w.pop_front();
      b = w.pop_front();
      c += a + b;
      w.push_back(a + b);
    end
    return c;
  endfunction

  initial begin
    start = 0;
    foreach (din[i]) din[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 300; k++) begin
      int unsigned nn, w [$], t0, t;
      longint cost, kraft;
      int unsigned maxl;
      w.delete();
      nn = 2 + $urandom % 31;
      if (k < 20) nn = 32;
      if (k == 20) nn = 2;
      // descending weights, some skewed, some flat
      for (int i = 0; i < int'(nn) - 1; i++) w.push_back((k % 3 == 0) ? 1 + $urandom % 8 : 1 + $urandom % 400);
      w.rsort();
      @(negedge clk);
      for (int i = 0; i < NSYM; i++) begin
        din[i].valid = (i < int'(nn));
        din[i].sym   = 8'(i + 90);
        din[i].cnt   = (i < int'(nn) - 1) ? CNT_W'(w[i]) : '0;
      end
      start = 1;
      @(negedge clk);
      start = 0;
      t = 1;
      while (!done) begin @(negedge clk); t++; end
      w.push_back(0);
      cost = 0; kraft = 0; maxl = 0;
      for (int i = 0; i < int'(nn); i++) begin
        cost  += longint'(w[i]) * dout[i].len;
        kraft += longint'(1) << (32 - dout[i].len);
        if (dout[i].len > maxl) maxl = dout[i].len;
      end
      checks += 5;
      if (n != 6'(nn)) begin failures++; $display("FAIL: n %0d expected %0d", n, nn); end
      if (cost != opt_cost(w)) begin failures++; $display("FAIL: cost %0d optimal %0d (n=%0d)", cost, opt_cost(w), nn); end
      if (kraft != (longint'(1) << 32)) begin failures++; $display("FAIL: not a complete code (n=%0d)", nn); end
      if (dout[nn-1].len != maxl || maxl > LMAX) begin failures++; $display("FAIL: escape length %0d, max %0d", dout[nn-1].len, maxl); end
      if (t != nn) begin failures++; $display("FAIL: %0d cycles for %0d leaves", t, nn); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
