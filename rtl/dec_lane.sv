// dec_lane: one decode lane with a four-stage lookup table.
//
// A lane takes a whole flit and rebuilds its BF16 values. Signs and mantissas
// are copied from their fields; the exponents are decoded one codeword at a
// time from the front of the codeword stream. Following the paper's
// multi-stage LUT, the table is split into four stages of eight entries each,
// indexed by the first 8, 16, 24 and 32 bits of the stream. In the first
// cycle of a codeword stage 1 is searched; on a miss the next cycle searches
// stage 2, and so on, so a codeword held in stage s costs s cycles. Stage 4
// also recognises the reserved escape (24 ones) and then takes the following
// 8 bits as the raw exponent. Each entry stores {codeword, length, exponent};
// an entry matches when the first `length` bits of the stream equal its
// codeword.
//
// Raw flits are copied out in one cycle. A codeword that matches nothing
// (which a correct stream never contains) raises err and ends the flit.
//
// Interface: prog programs the table (broadcast to all lanes). in_valid /
// in_flit / in_ready accept a data or raw flit when the lane is idle;
// out_valid/out_cnt/out_val hold the decoded values until out_ready.
// hit_stage is a one-hot strobe of the stage that resolved a codeword,
// esc_hit strobes for an escape.
module dec_lane
  import lexi_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  lut_prog_t        prog,
  input  logic             in_valid,
  input  flit_t            in_flit,
  output logic             in_ready,
  output logic             out_valid,
  output logic [3:0]       out_cnt,
  output bf16_t            out_val [NMAX],
  input  logic             out_ready,
  output logic [DEC_STAGES-1:0] hit_stage,
  output logic             esc_hit,
  output logic             err
);
  typedef enum logic [1:0] {S_IDLE, S_DEC, S_DONE} state_e;

  logic             v_q    [DEC_STAGES][DEC_ENT];
  logic [LMAX-1:0]  code_q [DEC_STAGES][DEC_ENT];
  logic [LEN_W-1:0] len_q  [DEC_STAGES][DEC_ENT];
  logic [EXP_W-1:0] sym_q  [DEC_STAGES][DEC_ENT];

  state_e           state_q;
  logic [PAY_W-1:0] stream_q;
  logic [3:0]       n_q, idx_q;
  logic [1:0]       st_q;

  // ---- table programming ------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < DEC_STAGES; s++)
        for (int e = 0; e < DEC_ENT; e++) begin
          v_q[s][e] <= 1'b0; code_q[s][e] <= '0; len_q[s][e] <= '0; sym_q[s][e] <= '0;
        end
    end else if (prog.clr) begin
      for (int s = 0; s < DEC_STAGES; s++)
        for (int e = 0; e < DEC_ENT; e++) v_q[s][e] <= 1'b0;
    end else if (prog.we && prog.place) begin
      v_q[prog.stage][prog.slot]    <= 1'b1;
      code_q[prog.stage][prog.slot] <= prog.code;
      len_q[prog.stage][prog.slot]  <= prog.len;
      sym_q[prog.stage][prog.slot]  <= prog.sym;
    end
  end

  // ---- search of the current stage --------------------------------------
  logic [31:0]      win;
  logic             hit, esc;
  logic [EXP_W-1:0] hsym;
  logic [5:0]       hlen;
  always_comb begin
    win  = stream_q[PAY_W-1 -: 32];
    hit  = 1'b0;
    hsym = '0;
    hlen = '0;
    for (int e = 0; e < DEC_ENT; e++) begin
      if (!hit && v_q[st_q][e] && len_q[st_q][e] != '0 &&
          (win >> (6'd32 - 6'(len_q[st_q][e]))) == 32'(code_q[st_q][e])) begin
        hit  = 1'b1;
        hsym = sym_q[st_q][e];
        hlen = 6'(len_q[st_q][e]);
      end
    end
    esc = !hit && (st_q == 2'd3) && (win[31 -: LMAX] == '1);
    if (esc) begin
      hsym = win[EXP_W-1:0];
      hlen = 6'(ESC_W);
    end
  end

  assign in_ready  = (state_q == S_IDLE);
  assign out_valid = (state_q == S_DONE);
  assign out_cnt   = n_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE; stream_q <= '0; n_q <= '0; idx_q <= '0; st_q <= '0;
      hit_stage <= '0; esc_hit <= 1'b0; err <= 1'b0;
      for (int i = 0; i < NMAX; i++) out_val[i] <= '0;
    end else begin
      hit_stage <= '0;
      esc_hit   <= 1'b0;
      err       <= 1'b0;
      unique case (state_q)
        S_IDLE: if (in_valid) begin
          n_q   <= in_flit.count;
          idx_q <= '0;
          st_q  <= '0;
          if (in_flit.kind == FK_RAW) begin
            for (int i = 0; i < NMAX; i++) begin
              if (i < RAW_MAX) out_val[i] <= in_flit.payload[PAY_W-1-16*i -: 16];
              else             out_val[i] <= '0;
            end
            state_q <= S_DONE;
          end else begin
            // signs and mantissas now; exponents are filled in by S_DEC
            logic [PAY_W-1:0] mf;
            mf = in_flit.payload << in_flit.count;
            for (int i = 0; i < NMAX; i++) begin
              out_val[i].sign <= in_flit.payload[PAY_W-1-i];
              out_val[i].man  <= mf[PAY_W-1-7*i -: 7];
              out_val[i].exp  <= '0;
            end
            stream_q <= in_flit.payload << (8 * 32'(in_flit.count));
            state_q  <= (in_flit.count == '0) ? S_DONE : S_DEC;
          end
        end
        S_DEC: begin
          if (hit || esc) begin
            out_val[idx_q].exp <= hsym;
            stream_q           <= stream_q << hlen;
            st_q               <= '0;
            idx_q              <= idx_q + 4'd1;
            if (esc) esc_hit <= 1'b1;
            else     hit_stage[st_q] <= 1'b1;
            if (idx_q + 4'd1 == n_q) state_q <= S_DONE;
          end else if (st_q == 2'd3) begin
            err     <= 1'b1;
            state_q <= S_DONE;
          end else begin
            st_q <= st_q + 2'd1;
          end
        end
        S_DONE: if (out_ready) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
