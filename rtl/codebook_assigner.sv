// codebook_assigner: canonical codes and LUT programming, one entry per cycle.
//
// Takes the code lengths of one codebook in rank order (most frequent
// exponent first, escape leaf last) and turns them into canonical prefix-free
// codewords: codes of one length are consecutive integers in rank order, and
// the first code of length L is (first code of length L-1 + number of codes of
// length L-1) << 1. Because the escape leaf is the last entry and has the
// longest length, it receives the all-ones codeword, which the decoder
// recognises as the first 24 bits being ones.
//
// The paper programs all LUT entries in 32 cycles; this block walks the 32
// ranks one per cycle and broadcasts a lut_prog_t word to every encoder and
// decoder lane. The encoder LUT slot is the rank. The decoder holds four
// stages of eight entries indexed by 8/16/24/32 bits; each exponent goes to
// the first stage that has a free entry and is wide enough for its code,
// which puts frequent, short codes in stage 1 (the paper segments the table
// "based on frequency and code length"; the greedy rule is this design's).
// An exponent that fits no stage is left out of both LUTs and will be sent
// through the escape, so the result is always decodable.
//
// Interface: start with cb/n; the clear word goes out with the first clock
// edge, then 32 programming words follow, one per cycle; done pulses with the
// last one (33 cycles after start).
// The same block runs in the compressor (after the tree builder) and in the
// decompressor (after a codebook has arrived in flits), so both ends derive
// identical tables from the same {exponent, length} list.
module codebook_assigner
  import lexi_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  cb_ent_t    cb [NSYM],
  input  logic [5:0] n,
  output lut_prog_t  prog,
  output logic       busy,
  output logic       done,
  output logic [LEN_W-1:0] esc_len,
  output logic       unplaced     // strobe: an exponent did not fit any stage
);
  localparam int unsigned CDW = LMAX + 1;

  cb_ent_t        cb_q [NSYM];
  logic [5:0]     n_q;
  logic [5:0]     r_q;
  logic [CDW-1:0] next_q [LMAX+1];
  logic [3:0]     fill_q [DEC_STAGES];

  // initial canonical code per length, from the length histogram
  logic [5:0]     bl_count [LMAX+1];
  logic [CDW-1:0] first_code [LMAX+1];
  always_comb begin
    for (int l = 0; l <= LMAX; l++) bl_count[l] = '0;
    for (int r = 0; r < NSYM; r++) begin
      if (6'(r) < n && cb[r].len != '0 && 32'(cb[r].len) <= LMAX) bl_count[cb[r].len] += 6'd1;
    end
    first_code[0] = '0;
    for (int l = 1; l <= LMAX; l++) begin
      first_code[l] = CDW'((first_code[l-1] + CDW'(l == 1 ? 6'd0 : bl_count[l-1])) << 1);
    end
  end

  // stage choice for the current rank
  logic [1:0]       st;
  logic             st_ok;
  cb_ent_t          cur;
  logic             is_esc;
  always_comb begin
    cur    = cb_q[r_q[4:0]];
    is_esc = (r_q + 6'd1 == n_q);
    st     = '0;
    st_ok  = 1'b0;
    for (int s = DEC_STAGES - 1; s >= 0; s--) begin
      if (fill_q[s] < 4'(DEC_ENT) && 32'(cur.len) <= 8 * (s + 1)) begin
        st = 2'(s); st_ok = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; unplaced <= 1'b0;
      r_q <= '0; n_q <= '0; prog <= '0; esc_len <= '0;
      for (int r = 0; r < NSYM; r++) cb_q[r] <= '0;
      for (int l = 0; l <= LMAX; l++) next_q[l] <= '0;
      for (int s = 0; s < DEC_STAGES; s++) fill_q[s] <= '0;
    end else begin
      done     <= 1'b0;
      unplaced <= 1'b0;
      prog     <= '0;
      if (start) begin
        busy    <= 1'b1;
        prog.clr <= 1'b1;
        cb_q    <= cb;
        n_q     <= n;
        r_q     <= '0;
        next_q  <= first_code;
        for (int s = 0; s < DEC_STAGES; s++) fill_q[s] <= '0;
      end else if (busy) begin
        prog.we      <= 1'b1;
        prog.enc_idx <= r_q[4:0];
        prog.sym     <= cur.sym;
        prog.len     <= cur.len;
        prog.code    <= next_q[cur.len][LMAX-1:0];
        prog.stage   <= st;
        prog.slot    <= fill_q[st][2:0];
        if (r_q < n_q && cur.len != '0) begin
          next_q[cur.len] <= next_q[cur.len] + 1'b1;
          if (is_esc) begin
            esc_len <= cur.len;
          end else if (st_ok) begin
            prog.place <= 1'b1;
            fill_q[st] <= fill_q[st] + 4'd1;
          end else begin
            unplaced <= 1'b1;
          end
        end
        r_q <= r_q + 6'd1;
        if (r_q == 6'(NSYM - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
