// tb_flit_packer: checks flit contents, fullness and the codebook priority.
//
// Random groups of values are pushed, in alternating raw and compressed
// stretches, with random codeword lengths (1..24 bits, or 32 for an escape)
// and random link back-pressure. Every flit is unpacked here, field by field,
// against the stream of pushed values: signs, mantissas and codewords in the
// documented positions, zero padding, at most 10 values and 94 payload bits
// (5 values for raw flits), no mixing of kinds. A flit sent while input was
// still offered must be full: the next value would not have fitted. Injected
// codebook flits must pass through unchanged.
module tb_flit_packer;
  import lexi_pkg::*;
  localparam int M = 10;
  logic clk = 1'b0, rst_n = 1'b0;
  always #0.5 clk = ~clk;

  logic        in_pend, in_valid, in_ready, cb_valid, cb_ready, out_valid, out_ready;
  logic [3:0]  in_cnt;
  pk_ent_t     in_ent [M];
  flit_t       cb_flit, out_flit;
  logic [4:0]  comp_q;

  flit_packer #(.M(M), .QD(2 * M)) dut (.*);

  int unsigned checks = 0, failures = 0, nraw = 0, ndata = 0, ncb = 0, ncbx = 0, nfull = 0;
  pk_ent_t     exq [$];
  longint      pushed = 0, popped = 0;

  function automatic int unsigned wbits(input pk_ent_t e);
    return e.raw ? 16 : 8 + e.cw_len;
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) for (int j = 0; j < M; j++) if (j < in_cnt) begin exq.push_back(in_ent[j]); pushed++; end
    if (out_valid && out_ready) begin
      if (out_flit.kind == FK_CB || out_flit.kind == FK_CB_LAST) begin
        ncb++;
        checks++;
        if (!cb_valid || out_flit != cb_flit) begin failures++; $display("FAIL: codebook flit altered"); end
      end else begin
        int unsigned k, pos, bits;
        logic [PAY_W-1:0] p;
        bit isr;
        k = out_flit.count; p = out_flit.payload; isr = (out_flit.kind == FK_RAW);
        checks++;
        if (k == 0 || k > (isr ? RAW_MAX : NMAX) || k > exq.size()) begin
          failures++; $display("FAIL: flit count %0d", k);
        end else begin
          bits = 0;
          for (int i = 0; i < int'(k); i++) begin
            checks++;
            if (exq[i].raw != isr) begin failures++; $display("FAIL: kinds mixed"); end
            bits += wbits(exq[i]);
          end
          if (isr) begin
            nraw++;
            for (int i = 0; i < int'(k); i++) begin
              checks++;
              if (p[PAY_W-1-16*i -: 16] != exq[i].v) begin failures++; $display("FAIL: raw value %0d", i); end
            end
          end else begin
            ndata++;
            pos = PAY_W;
            for (int i = 0; i < int'(k); i++) begin pos--; if (p[pos] != exq[i].v.sign) begin failures++; $display("FAIL: sign %0d", i); end end
            for (int i = 0; i < int'(k); i++) begin
              pos -= 7;
              if (p[pos +: 7] != exq[i].v.man) begin failures++; $display("FAIL: mantissa %0d", i); end
            end
            for (int i = 0; i < int'(k); i++) begin
              logic [31:0] c;
              c = '0;
              for (int b = 0; b < int'(exq[i].cw_len); b++) begin pos--; c = {c[30:0], p[pos]}; end
              checks++;
              if (c != exq[i].cw) begin failures++; $display("FAIL: codeword %0d: %h vs %h", i, c, exq[i].cw); end
            end
            checks++;
            if (bits > PAY_W || ((p & ((PAY_W'(1) << pos) - 1)) != '0)) begin failures++; $display("FAIL: size/padding"); end
          end
          // fullness: sent with input pending and below the limit => next value would not fit
          if (in_pend && k < (isr ? RAW_MAX : NMAX)) begin
            checks++;
            if (exq.size() > k && exq[k].raw == isr && (isr || bits + wbits(exq[k]) <= PAY_W)) begin
              failures++; $display("FAIL: flit sent before it was full");
            end else nfull++;
          end
          for (int i = 0; i < int'(k); i++) begin void'(exq.pop_front()); popped++; end
        end
      end
    end
  end

  initial begin
    int unsigned raw_left;
    in_pend = 0; in_valid = 0; in_cnt = 0; cb_valid = 0; cb_flit = '0; out_ready = 0;
    foreach (in_ent[i]) in_ent[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    raw_left = 40;
    for (int k = 0; k < 4000; k++) begin
      @(negedge clk);
      if (in_valid && dut.in_ready == 1'b0) ; // hold the offer
      out_ready = ($urandom % 4 != 0);
      if (!cb_valid && $urandom % 200 == 0) begin
        cb_valid = 1; cb_flit.kind = FK_CB; cb_flit.count = 4'd7; cb_flit.payload = {$urandom, $urandom, $urandom};
        ncbx++;
      end
      if (!in_valid || acc_q) begin
        in_pend  = ($urandom % 5 != 0);
        in_valid = in_pend;
        in_cnt   = 4'(1 + $urandom % M);
        if (raw_left == 0 && $urandom % 300 == 0) raw_left = 30 + $urandom % 40;
        for (int j = 0; j < M; j++) begin
          in_ent[j].raw    = (raw_left != 0);
          in_ent[j].v      = 16'($urandom);
          in_ent[j].cw_len = ($urandom % 10 == 0) ? 6'd32 : 6'(1 + $urandom % ((k % 2) ? 4 : 24));
          in_ent[j].cw     = 32'($urandom) & ((in_ent[j].cw_len == 32) ? 32'hFFFFFFFF : ((32'd1 << in_ent[j].cw_len) - 1));
        end
        if (raw_left != 0) raw_left--;
      end
    end
    @(negedge clk);
    while (!acc_q && in_valid) @(negedge clk);
    in_valid = 0; in_pend = 0; out_ready = 1;
    repeat (50) @(negedge clk);
    $display("flits: raw %0d data %0d codebook %0d of %0d, full-flit checks %0d", nraw, ndata, ncb, ncbx, nfull);
    checks++;
    if (pushed != popped || nraw == 0 || ndata == 0 || ncb != ncbx || ncb == 0 || nfull == 0) begin
      failures++; $display("FAIL: pushed %0d popped %0d", pushed, popped);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic acc_q = 1'b0;
  always @(posedge clk) begin
    acc_q <= in_valid && in_ready;
    if (cb_valid && cb_ready) cb_valid <= 1'b0;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
