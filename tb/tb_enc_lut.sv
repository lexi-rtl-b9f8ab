// tb_enc_lut: checks codeword lookup, the escape fallback and reprogramming.
//
// A random table of up to 32 distinct exponents with random codewords is
// written through the programming port (some slots left unplaced). Every
// exponent 0..255 is then looked up: a programmed exponent must return its
// codeword and length, any other one the 24 ones + raw exponent escape of
// 32 bits. A clear must empty the table.
module tb_enc_lut;
  import lexi_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #0.5 clk = ~clk;

  lut_prog_t        prog;
  logic [EXP_W-1:0] in_exp;
  logic [CW_W-1:0]  cw;
  logic [CWL_W-1:0] cw_len;
  logic             esc;

  enc_lut dut (.*);

  int unsigned checks = 0, failures = 0;

  initial begin
    prog = '0; in_exp = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 6; round++) begin
      int          code_of [int], len_of [int];
      logic [7:0]  base;
      code_of.delete(); len_of.delete();
      base = 8'($urandom);
      @(negedge clk);
      prog = '0; prog.clr = 1;
      @(negedge clk);
      for (int r = 0; r < 32; r++) begin
        prog = '0;
        prog.we      = 1;
        prog.enc_idx = 5'(r);
        prog.sym     = 8'(base + 8'(r * 3));
        prog.len     = LEN_W'(1 + $urandom % 24);
        prog.code    = LMAX'($urandom) & ((LMAX'(1) << prog.len) - 1);
        prog.place   = ($urandom % 6 != 0);
        if (prog.place) begin code_of[prog.sym] = prog.code; len_of[prog.sym] = prog.len; end
        @(negedge clk);
      end
      prog = '0;
      for (int e = 0; e < 256; e++) begin
        in_exp = 8'(e);
        #0.1;
        checks++;
        if (code_of.exists(e)) begin
          if (esc || cw != 32'(code_of[e]) || cw_len != 6'(len_of[e])) begin
            failures++; $display("FAIL: exp %0d -> %h/%0d", e, cw, cw_len);
          end
        end else if (!esc || cw != {24'hFFFFFF, 8'(e)} || cw_len != 6'd32) begin
          failures++; $display("FAIL: exp %0d not escaped (%h/%0d)", e, cw, cw_len);
        end
      end
    end
    // clear empties the table
    @(negedge clk);
    prog = '0; prog.clr = 1;
    @(negedge clk);
    prog = '0;
    for (int e = 0; e < 256; e++) begin
      in_exp = 8'(e);
      #0.1;
      checks++;
      if (!esc) begin failures++; $display("FAIL: exp %0d hit after clear", e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
