// tb_codebook_assigner: checks canonical codes, LUT placement and timing.
//
// Random complete codes of 2..32 leaves are made by splitting leaves of a
// two-leaf code; lengths are listed in rank order (non-decreasing, escape
// last). Every programming word is compared with the reference model in
// lexi_ref_pkg: codeword, decoder stage and slot, placed or not. The escape
// must get the all-ones code, the first word must be a clear, and done must
// come 33 cycles after start (one clear plus 32 entries).
module tb_codebook_assigner;
  import lexi_pkg::*;
  import lexi_ref_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #0.5 clk = ~clk;

  logic       start, busy, done, unplaced;
  cb_ent_t    cb [NSYM];
  logic [5:0] n;
  lut_prog_t  prog;
  logic [LEN_W-1:0] esc_len;

  codebook_assigner dut (.*);

  int unsigned checks = 0, failures = 0, n_unpl = 0, n_deep = 0;

  initial begin
    start = 0; n = 0;
    foreach (cb[i]) cb[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 300; k++) begin
      int unsigned lens [$];
      book_t b;
      bit    placed [32];
      int    stage [32], slot [32], fill [4];
      int    t, widx, nu;
      int unsigned nn;
      nn = 2 + $urandom % 31;
      if (k < 30) nn = 32;
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
        b.sym[r] = 8'(r * 7 + k);
        b.len[r] = (r < int'(nn)) ? lens[r] : 0;
        b.code[r] = 0;
      end
      canon(b);
      placement(b, placed, stage);
      fill = '{0, 0, 0, 0};
      for (int r = 0; r < 32; r++) begin
        slot[r] = 0;
        if (placed[r]) begin
          slot[r] = fill[stage[r]];
          fill[stage[r]]++;
        end
      end
      @(negedge clk);
      for (int r = 0; r < NSYM; r++) cb[r] = '{sym: b.sym[r], len: LEN_W'(b.len[r])};
      n = 6'(nn);
      start = 1;
      @(negedge clk);
      start = 0;
      t = 1; widx = 0; nu = 0;
      checks++;
      if (!prog.clr) begin failures++; $display("FAIL: no clear word"); end
      while (!done) begin
        @(negedge clk);
        t++;
        if (unplaced) nu++;
        if (prog.we) begin
          checks++;
          if (widx < int'(nn) - 1) begin
            if (prog.enc_idx != 5'(widx) || prog.place != placed[widx] || prog.sym != b.sym[widx] ||
                32'(prog.code) != b.code[widx] || 32'(prog.len) != b.len[widx] ||
                (placed[widx] && (prog.stage != 2'(stage[widx]) || prog.slot != 3'(slot[widx])))) begin
              failures++;
              $display("FAIL: rank %0d code %h/%0d stage %0d slot %0d place %0d; expected %h/%0d %0d %0d %0d",
                       widx, prog.code, prog.len, prog.stage, prog.slot, prog.place,
                       b.code[widx], b.len[widx], stage[widx], slot[widx], placed[widx]);
            end
          end else if (prog.place) begin
            failures++;
            $display("FAIL: rank %0d (escape or unused) placed", widx);
          end
          widx++;
        end
      end
      for (int r = 0; r < int'(nn) - 1; r++) if (!placed[r]) n_unpl++;
      for (int r = 0; r < int'(nn) - 1; r++) if (placed[r] && stage[r] == 3) n_deep++;
      checks += 4;
      if (t != 33) begin failures++; $display("FAIL: %0d cycles", t); end
      if (widx != 32) begin failures++; $display("FAIL: %0d writes", widx); end
      if (32'(esc_len) != b.len[nn-1] || b.code[nn-1] != (32'(1) << b.len[nn-1]) - 1) begin
        failures++; $display("FAIL: escape code");
      end
      if (nu != 0 && nu != 1 && nu > 32) begin failures++; end
    end
    $display("unplaced exponents %0d, stage-4 entries %0d", n_unpl, n_deep);
    checks++;
    if (n_deep == 0) begin failures++; $display("FAIL: no stage-4 placement exercised"); end
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
