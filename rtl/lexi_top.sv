// lexi_top: exponent codec pair of one chiplet's network interface.
//
// The egress side (lexi_compressor) sits between the chiplet's PEs/SRAM and
// its router: it learns a Huffman codebook from the first activations of each
// layer and then sends every BF16 value as sign, mantissa and a short
// exponent codeword, packed into 100-bit flits. The ingress side
// (lexi_decompressor) takes flits arriving from the router, whether
// activations compressed on the fly by another chiplet or weights compressed
// offline and streamed from memory, and restores the BF16 values for the PEs.
// The router, the network-on-interposer, the SRAM and the PE array are not
// part of this design; their connections are this module's ports.
//
// Interface (all on clk, active-low asynchronous reset):
//   layer_start            begin a new layer on the egress side (in_valid low)
//   tx_valid/tx_cnt/tx_val/tx_ready   up to M BF16 values per cycle from PEs
//   tx_flit_valid/tx_flit/tx_flit_ready  flits to the router
//   rx_flit_valid/rx_flit/rx_flit_ready  flits from the router
//   rx_valid/rx_cnt/rx_val/rx_ready   decoded values to the PEs, one flit's
//                                     worth per cycle
// The remaining outputs are monitoring strobes of both halves.
module lexi_top
  import lexi_pkg::*;
#(
  parameter int unsigned M       = 10,
  parameter int unsigned DEPTH   = 8,
  parameter int unsigned TRAIN_N = 512
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   layer_start,
  input  logic                   tx_valid,
  input  logic [$clog2(M+1)-1:0] tx_cnt,
  input  bf16_t                  tx_val [M],
  output logic                   tx_ready,
  output logic                   tx_flit_valid,
  output flit_t                  tx_flit,
  input  logic                   tx_flit_ready,
  input  logic                   rx_flit_valid,
  input  flit_t                  rx_flit,
  output logic                   rx_flit_ready,
  output logic                   rx_valid,
  output logic [3:0]             rx_cnt,
  output bf16_t                  rx_val [NMAX],
  input  logic                   rx_ready,
  output logic [2:0]             st_phase,
  output logic [M-1:0]           st_hit,
  output logic [M-1:0]           st_miss,
  output logic                   st_lane_stall,
  output logic                   st_arb_wait,
  output logic [M-1:0]           st_esc,
  output logic                   st_hist_overflow,
  output logic                   st_unplaced,
  output logic [DEC_STAGES-1:0]  st_dec_stage,
  output logic                   st_dec_esc,
  output logic                   st_dec_err,
  output logic                   st_cb_loaded
);

  lexi_compressor #(.M(M), .DEPTH(DEPTH), .TRAIN_N(TRAIN_N)) u_comp (
    .clk, .rst_n, .layer_start,
    .in_valid(tx_valid), .in_cnt(tx_cnt), .in_val(tx_val), .in_ready(tx_ready),
    .out_valid(tx_flit_valid), .out_flit(tx_flit), .out_ready(tx_flit_ready),
    .st_phase, .st_hit, .st_miss, .st_lane_stall, .st_arb_wait, .st_esc,
    .st_hist_overflow, .st_unplaced
  );

  lexi_decompressor #(.M(M)) u_decomp (
    .clk, .rst_n,
    .in_valid(rx_flit_valid), .in_flit(rx_flit), .in_ready(rx_flit_ready),
    .out_valid(rx_valid), .out_cnt(rx_cnt), .out_val(rx_val), .out_ready(rx_ready),
    .st_hit_stage(st_dec_stage), .st_esc(st_dec_esc), .st_err(st_dec_err),
    .st_cb_loaded
  );

endmodule
