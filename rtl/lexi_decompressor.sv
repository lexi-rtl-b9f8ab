// lexi_decompressor: ingress exponent decompressor of one chiplet.
//
// Flits from the router are handed to M decode lanes in round-robin order,
// each lane decoding a whole flit on its own (dec_lane), and the decoded
// groups are collected from the lanes in the same round-robin order, so the
// values leave in the order they were sent. This is the paper's parallel
// decode-lane arrangement; with one flit per cycle on the link and M lanes,
// each lane has M cycles per flit.
//
// Codebook flits are not sent to lanes. Their {exponent, length} entries are
// collected; when the last one arrives the dispatcher stops accepting flits,
// waits until every lane has finished the flits of the old codebook, then
// runs codebook_assigner, which programs all lanes' stage tables in 33
// cycles, and resumes. Because the assigner is the same block the compressor
// uses, both ends derive identical codewords from the transmitted lengths.
// The drain-and-reprogram sequence is this design's choice.
//
// Interface: in_valid/in_flit/in_ready from the router; out_valid/out_cnt/
// out_val/out_ready deliver one decoded flit's values per cycle to the PEs.
// st_hit_stage (per stage), st_esc, st_err and st_cb_loaded are event
// strobes for monitoring.
module lexi_decompressor
  import lexi_pkg::*;
#(
  parameter int unsigned M = 10
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  flit_t                 in_flit,
  output logic                  in_ready,
  output logic                  out_valid,
  output logic [3:0]            out_cnt,
  output bf16_t                 out_val [NMAX],
  input  logic                  out_ready,
  output logic [DEC_STAGES-1:0] st_hit_stage,
  output logic                  st_esc,
  output logic                  st_err,
  output logic                  st_cb_loaded
);
  localparam int unsigned LW = (M > 1) ? $clog2(M) : 1;

  typedef enum logic [1:0] {D_RUN, D_DRAIN, D_PROG} dstate_e;

  dstate_e       ds_q;
  logic [LW-1:0] rr_q, op_q;
  cb_ent_t       cb_q [NSYM];
  logic [5:0]    cbn_q;

  logic          is_cb;
  logic [M-1:0]  l_in_ready, l_in_valid, l_out_valid, l_out_ready, l_esc, l_err;
  logic [3:0]    l_cnt [M];
  bf16_t         l_val [M][NMAX];
  logic [DEC_STAGES-1:0] l_hit [M];
  lut_prog_t     prog;
  logic          a_busy, a_done, a_unpl;
  logic [LEN_W-1:0] a_esc_len;

  assign is_cb    = (in_flit.kind == FK_CB) || (in_flit.kind == FK_CB_LAST);
  assign in_ready = (ds_q == D_RUN) && (is_cb || l_in_ready[rr_q]);

  always_comb begin
    l_in_valid = '0;
    if (ds_q == D_RUN && in_valid && !is_cb) l_in_valid[rr_q] = 1'b1;
  end

  for (genvar i = 0; i < M; i++) begin : g_lane
    dec_lane u_lane (
      .clk, .rst_n, .prog,
      .in_valid(l_in_valid[i]), .in_flit, .in_ready(l_in_ready[i]),
      .out_valid(l_out_valid[i]), .out_cnt(l_cnt[i]), .out_val(l_val[i]),
      .out_ready(l_out_ready[i]), .hit_stage(l_hit[i]), .esc_hit(l_esc[i]), .err(l_err[i])
    );
  end

  codebook_assigner u_assign (
    .clk, .rst_n, .start(ds_q == D_DRAIN && l_in_ready == '1),
    .cb(cb_q), .n(cbn_q), .prog, .busy(a_busy), .done(a_done),
    .esc_len(a_esc_len), .unplaced(a_unpl)
  );

  // ---- in-order collection ------------------------------------------------
  always_comb begin
    l_out_ready       = '0;
    l_out_ready[op_q] = out_ready;
  end
  assign out_valid = l_out_valid[op_q];
  assign out_cnt   = l_cnt[op_q];
  assign out_val   = l_val[op_q];

  always_comb begin
    st_hit_stage = '0;
    for (int i = 0; i < M; i++) st_hit_stage |= l_hit[i];
  end
  assign st_esc       = (l_esc != '0);
  assign st_err       = (l_err != '0);
  assign st_cb_loaded = a_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ds_q <= D_RUN; rr_q <= '0; op_q <= '0; cbn_q <= '0;
      for (int e = 0; e < NSYM; e++) cb_q[e] <= '0;
    end else begin
      if (out_valid && out_ready) op_q <= (32'(op_q) == M - 1) ? '0 : op_q + 1'b1;
      unique case (ds_q)
        D_RUN: if (in_valid && in_ready) begin
          if (is_cb) begin
            for (int e = 0; e < CB_MAX; e++) begin
              if (4'(e) < in_flit.count && 32'(cbn_q) + e < NSYM)
                cb_q[(32'(cbn_q) + e) % NSYM] <= in_flit.payload[PAY_W-1-CB_ENT_W*e -: CB_ENT_W];
            end
            cbn_q <= cbn_q + 6'(in_flit.count);
            if (in_flit.kind == FK_CB_LAST) ds_q <= D_DRAIN;
          end else begin
            rr_q <= (32'(rr_q) == M - 1) ? '0 : rr_q + 1'b1;
          end
        end
        D_DRAIN: if (l_in_ready == '1) ds_q <= D_PROG;
        D_PROG: if (a_done) begin
          ds_q  <= D_RUN;
          cbn_q <= '0;
        end
        default: ds_q <= D_RUN;
      endcase
    end
  end

  a_no_err: assert property (@(posedge clk) disable iff (!rst_n) !st_err);

endmodule
