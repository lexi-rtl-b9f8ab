// lexi_compressor: egress exponent compressor of one chiplet.
//
// Values from the PE array arrive M (10) at a time, lane i taking the i-th
// value of each group. Every layer goes through the same phases:
//
//   TRAIN   the first TRAIN_N (512) exponents of the layer are counted in the
//           lanes' local caches; evicted entries merge into the global
//           histogram through the three-cycle arbiter
//   FLUSH   the caches drain their remaining entries into the histogram
//   SORT    15-stage bitonic sort of the 32 histogram entries
//   TREE    Huffman code lengths, one merge per cycle (<= 31 cycles)
//   ASSIGN  canonical codes, all lanes' encoding LUTs programmed (32 cycles)
//   CB      the codebook ({exponent, length} in rank order) is sent in
//           FK_CB flits ahead of the compressed data
//   COMP    every exponent is replaced by its codeword (or the escape)
//
// Data never waits for the codebook: until COMP the values keep flowing as
// uncompressed FK_RAW flits, so the one-time build latency costs bandwidth
// only for those first values, not a stall. That choice, the raw phase and
// the codebook flit format are this design's; the paper states that the
// first 512 activations start tree generation and that the build is
// pipelined with the data.
//
// Interface: layer_start (with in_valid low) begins a new layer and a new
// codebook. in_valid/in_cnt/in_val/in_ready deliver up to M BF16 values per
// cycle. out_valid/out_flit/out_ready is the router side, one flit per cycle.
// The st_* outputs are event strobes and the phase, for monitoring.
module lexi_compressor
  import lexi_pkg::*;
#(
  parameter int unsigned M       = 10,
  parameter int unsigned DEPTH   = 8,
  parameter int unsigned TRAIN_N = 512
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   layer_start,
  input  logic                   in_valid,
  input  logic [$clog2(M+1)-1:0] in_cnt,
  input  bf16_t                  in_val [M],
  output logic                   in_ready,
  output logic                   out_valid,
  output flit_t                  out_flit,
  input  logic                   out_ready,
  output logic [2:0]             st_phase,
  output logic [M-1:0]           st_hit,
  output logic [M-1:0]           st_miss,
  output logic                   st_lane_stall,
  output logic                   st_arb_wait,
  output logic [M-1:0]           st_esc,
  output logic                   st_hist_overflow,
  output logic                   st_unplaced
);
  localparam int unsigned CW = $clog2(M + 1);
  localparam int unsigned TW = $clog2(TRAIN_N + 1);

  typedef enum logic [2:0] {
    P_TRAIN, P_FLUSH, P_SORT, P_TREE, P_ASSIGN, P_CB, P_COMP
  } phase_e;

  phase_e        ph_q;
  logic [TW-1:0] trained_q;
  logic [2:0]    cbf_q;          // codebook flits sent

  // ---- histogram front end ----------------------------------------------
  logic [M-1:0]  lane_act, c_ready, c_valid, c_empty, ev_v, gnt;
  logic [EXP_W-1:0] ev_s [M];
  logic [CNT_W-1:0] ev_c [M];
  logic [CW-1:0] gidx;
  logic          arb_busy, h_idle, flush, accept, pk_ready;
  hist_ent_t     hist [NSYM];

  always_comb begin
    for (int i = 0; i < M; i++) begin
      lane_act[i] = (ph_q == P_TRAIN) && (32'(i) < 32'(in_cnt)) &&
                    (32'(trained_q) + 32'(i) < TRAIN_N);
    end
  end

  assign in_ready = pk_ready && ((c_ready | ~lane_act) == '1);
  assign accept   = in_valid && in_ready;
  assign c_valid  = lane_act & {M{accept}};
  assign flush    = (ph_q == P_FLUSH);

  for (genvar i = 0; i < M; i++) begin : g_lane
    local_cache #(.DEPTH(DEPTH)) u_cache (
      .clk, .rst_n, .clear(layer_start),
      .in_valid(c_valid[i]), .in_exp(in_val[i].exp), .in_ready(c_ready[i]),
      .flush, .ev_valid(ev_v[i]), .ev_sym(ev_s[i]), .ev_cnt(ev_c[i]),
      .ev_ready(gnt[i]), .empty(c_empty[i]), .hit(st_hit[i]), .miss(st_miss[i])
    );
  end

  hist_arbiter #(.M(M), .HOLD(3)) u_arb (
    .clk, .rst_n, .req(ev_v), .gnt, .gnt_idx(gidx), .busy(arb_busy)
  );

  global_histogram u_hist (
    .clk, .rst_n, .clear(layer_start),
    .upd_valid(gnt != '0), .upd_sym(ev_s[gidx]), .upd_cnt(ev_c[gidx]),
    .hist, .idle(h_idle), .overflow(st_hist_overflow)
  );

  assign st_lane_stall = in_valid && pk_ready && !in_ready;
  assign st_arb_wait   = ($countones(ev_v) > 1);

  // ---- codebook generation ----------------------------------------------
  logic      so_v, t_busy, t_done, a_busy, a_done, flushed;
  hist_ent_t sorted [NSYM];
  cb_ent_t   cb [NSYM];
  logic [5:0] cb_n;
  lut_prog_t prog;
  logic [LEN_W-1:0] esc_len;

  assign flushed = (ph_q == P_FLUSH) && (c_empty == '1) && (ev_v == '0) && !arb_busy && h_idle;

  bitonic_sorter #(.N(NSYM)) u_sort (
    .clk, .rst_n, .in_valid(flushed), .din(hist), .out_valid(so_v), .dout(sorted)
  );

  huffman_tree_builder u_tree (
    .clk, .rst_n, .start(so_v && ph_q == P_SORT), .din(sorted),
    .busy(t_busy), .done(t_done), .dout(cb), .n(cb_n)
  );

  codebook_assigner u_assign (
    .clk, .rst_n, .start(t_done && ph_q == P_TREE), .cb, .n(cb_n),
    .prog, .busy(a_busy), .done(a_done), .esc_len, .unplaced(st_unplaced)
  );

  // ---- encoding lanes ---------------------------------------------------
  pk_ent_t pk [M];
  for (genvar i = 0; i < M; i++) begin : g_enc
    logic [CW_W-1:0]  cw;
    logic [CWL_W-1:0] cwl;
    logic             esc;
    enc_lut u_lut (.clk, .rst_n, .prog, .in_exp(in_val[i].exp), .cw, .cw_len(cwl), .esc);
    always_comb begin
      pk[i].raw    = (ph_q != P_COMP);
      pk[i].v      = in_val[i];
      pk[i].cw     = cw;
      pk[i].cw_len = cwl;
    end
    assign st_esc[i] = accept && (ph_q == P_COMP) && (32'(i) < 32'(in_cnt)) && esc;
  end

  // ---- codebook flits ---------------------------------------------------
  logic                  cb_valid, cb_ready;
  flit_t                 cb_flit;
  logic [$clog2(2*M+1)-1:0] comp_q;
  logic [2:0]            cbf_last;

  assign cbf_last = 3'((32'(cb_n) + CB_MAX - 1) / CB_MAX - 1);
  assign cb_valid = (ph_q == P_CB) && (comp_q == '0);
  always_comb begin
    int unsigned base;
    base             = CB_MAX * 32'(cbf_q);
    cb_flit.kind     = (cbf_q == cbf_last) ? FK_CB_LAST : FK_CB;
    cb_flit.count    = 4'((32'(cb_n) - base > CB_MAX) ? CB_MAX : (32'(cb_n) - base));
    cb_flit.payload  = '0;
    for (int e = 0; e < CB_MAX; e++) begin
      if (base + e < 32'(cb_n))
        cb_flit.payload[PAY_W-1-CB_ENT_W*e -: CB_ENT_W] = cb[(base + e) % NSYM];
    end
  end

  flit_packer #(.M(M), .QD(2 * M)) u_pack (
    .clk, .rst_n, .in_pend(in_valid), .in_valid(accept), .in_cnt, .in_ent(pk), .in_ready(pk_ready),
    .cb_valid, .cb_flit, .cb_ready,
    .out_valid, .out_flit, .out_ready, .comp_q
  );

  // ---- phase control ----------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph_q      <= P_TRAIN;
      trained_q <= '0;
      cbf_q     <= '0;
    end else if (layer_start) begin
      ph_q      <= P_TRAIN;
      trained_q <= '0;
      cbf_q     <= '0;
    end else begin
      unique case (ph_q)
        P_TRAIN: begin
          if (accept) begin
            if (32'(trained_q) + 32'(in_cnt) >= TRAIN_N) begin
              trained_q <= TW'(TRAIN_N);
              ph_q      <= P_FLUSH;
            end else begin
              trained_q <= trained_q + TW'(in_cnt);
            end
          end
        end
        P_FLUSH:  if (flushed) ph_q <= P_SORT;
        P_SORT:   if (so_v) ph_q <= P_TREE;
        P_TREE:   if (t_done) ph_q <= P_ASSIGN;
        P_ASSIGN: if (a_done) begin
          ph_q  <= P_CB;
          cbf_q <= '0;
        end
        P_CB: if (cb_valid && cb_ready) begin
          if (cbf_q == cbf_last) ph_q <= P_COMP;
          else cbf_q <= cbf_q + 3'd1;
        end
        P_COMP: ;
        default: ph_q <= P_TRAIN;
      endcase
    end
  end

  assign st_phase = ph_q;

  a_layer_idle: assert property (@(posedge clk) disable iff (!rst_n) layer_start |-> !in_valid);
  a_esc_fits:   assert property (@(posedge clk) disable iff (!rst_n)
                                 a_done |-> (esc_len != '0 && 32'(esc_len) <= LMAX));

endmodule
