// enc_lut: one lane's exponent-to-codeword lookup table.
//
// Every compressor lane holds its own copy of the 32-entry encoding table so
// that all lanes look up in the same cycle without contention, as in the
// paper. An entry is {exponent, codeword, length}; the lookup compares the
// arriving exponent against all entries at once (a small content-addressed
// table) and returns the codeword right aligned with its length. An exponent
// with no entry takes the paper's fallback: the 24-bit all-ones escape
// followed by the raw 8-bit exponent, 32 bits in all.
//
// Interface: prog is the broadcast programming word from codebook_assigner
// (clr empties the table, we writes slot enc_idx). The lookup is
// combinational: in_exp -> cw/cw_len/esc in the same cycle; the caller
// registers the result.
module enc_lut
  import lexi_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  lut_prog_t        prog,
  input  logic [EXP_W-1:0] in_exp,
  output logic [CW_W-1:0]  cw,
  output logic [CWL_W-1:0] cw_len,
  output logic             esc
);
  logic             v_q    [NSYM];
  logic [EXP_W-1:0] sym_q  [NSYM];
  logic [LMAX-1:0]  code_q [NSYM];
  logic [LEN_W-1:0] len_q  [NSYM];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NSYM; i++) begin
        v_q[i] <= 1'b0; sym_q[i] <= '0; code_q[i] <= '0; len_q[i] <= '0;
      end
    end else if (prog.clr) begin
      for (int i = 0; i < NSYM; i++) v_q[i] <= 1'b0;
    end else if (prog.we) begin
      v_q[prog.enc_idx]    <= prog.place;
      sym_q[prog.enc_idx]  <= prog.sym;
      code_q[prog.enc_idx] <= prog.code;
      len_q[prog.enc_idx]  <= prog.len;
    end
  end

  always_comb begin
    esc    = 1'b1;
    cw     = {{(LMAX){1'b1}}, in_exp};
    cw_len = CWL_W'(ESC_W);
    for (int i = 0; i < NSYM; i++) begin
      if (esc && v_q[i] && sym_q[i] == in_exp) begin
        esc    = 1'b0;
        cw     = CW_W'(code_q[i]);
        cw_len = CWL_W'(len_q[i]);
      end
    end
  end

endmodule
