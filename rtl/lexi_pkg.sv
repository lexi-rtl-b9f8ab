// lexi_pkg: types and constants shared by the exponent codec.
//
// A BF16 word is {sign, 8-bit exponent, 7-bit mantissa}. Only the exponent is
// entropy coded; sign and mantissa travel verbatim. Codebooks hold at most 32
// leaves (31 exponents plus one escape leaf), codewords are at most 24 bits,
// and an exponent that has no LUT entry is sent as the 24-bit all-ones escape
// followed by its raw 8 bits (32 bits in total), as the paper prescribes.
//
// Flit format (this design's choice of widths; the paper fixes only the field
// order {Header, Signs, Mantissas, Compressed exponents, Pad}):
//   flit[99:94]  header = {kind[1:0], count[3:0]}
//   flit[93:0]   payload, filled from the MSB down, zero padded
// 100 bits per flit is one cycle of a 100 Gb/s link at 1 GHz.
//   FK_DATA     : count values; count sign bits, count x 7 mantissa bits, then
//                 count exponent codewords, MSB first
//   FK_RAW      : count uncompressed BF16 words (at most 5)
//   FK_CB/_LAST : count codebook entries {exponent[7:0], length[4:0]} in rank
//                 order (most frequent first); the escape leaf is always the
//                 last entry of the FK_CB_LAST flit
package lexi_pkg;

  localparam int unsigned EXP_W      = 8;
  localparam int unsigned MAN_W      = 7;
  localparam int unsigned BF16_W     = 16;
  localparam int unsigned NSYM       = 32;   // codebook / sorter size
  localparam int unsigned SYM_IDX_W  = 5;
  localparam int unsigned LEN_W      = 5;    // code length field
  localparam int unsigned LMAX       = 24;   // longest codeword, bits
  localparam int unsigned ESC_W      = 32;   // escape: 24 ones + raw exponent
  localparam int unsigned CW_W       = 32;   // codeword bus width
  localparam int unsigned CWL_W      = 6;    // codeword length bus (0..32)
  localparam int unsigned CNT_W      = 16;   // frequency counter width

  localparam int unsigned FLIT_W     = 100;
  localparam int unsigned HDR_W      = 6;
  localparam int unsigned PAY_W      = FLIT_W - HDR_W;   // 94
  localparam int unsigned NMAX       = 10;   // values per data flit
  localparam int unsigned RAW_MAX    = PAY_W / BF16_W;   // 5
  localparam int unsigned CB_ENT_W   = EXP_W + LEN_W;    // 13
  localparam int unsigned CB_MAX     = PAY_W / CB_ENT_W; // 7

  localparam int unsigned DEC_STAGES = 4;    // index widths 8/16/24/32
  localparam int unsigned DEC_ENT    = 8;    // entries per stage

  typedef enum logic [1:0] {
    FK_DATA    = 2'd0,
    FK_RAW     = 2'd1,
    FK_CB      = 2'd2,
    FK_CB_LAST = 2'd3
  } flit_kind_e;

  typedef struct packed {
    logic             sign;
    logic [EXP_W-1:0] exp;
    logic [MAN_W-1:0] man;
  } bf16_t;

  typedef struct packed {
    flit_kind_e       kind;
    logic [3:0]       count;
    logic [PAY_W-1:0] payload;
  } flit_t;

  // one histogram / sorter entry
  typedef struct packed {
    logic             valid;
    logic [EXP_W-1:0] sym;
    logic [CNT_W-1:0] cnt;
  } hist_ent_t;

  // one codebook entry as produced by the tree builder and carried in flits
  typedef struct packed {
    logic [EXP_W-1:0] sym;
    logic [LEN_W-1:0] len;
  } cb_ent_t;

  // LUT programming word broadcast to the encoder and decoder lanes
  typedef struct packed {
    logic                  clr;      // invalidate every entry first
    logic                  we;
    logic                  place;    // entry holds a symbol
    logic [SYM_IDX_W-1:0]  enc_idx;  // encoder LUT slot
    logic [1:0]            stage;    // decoder stage 0..3
    logic [2:0]            slot;     // decoder slot 0..7
    logic [EXP_W-1:0]      sym;
    logic [LMAX-1:0]       code;     // right aligned
    logic [LEN_W-1:0]      len;
  } lut_prog_t;

  // one value waiting in the egress packer
  typedef struct packed {
    logic             raw;      // send as uncompressed BF16
    bf16_t            v;
    logic [CW_W-1:0]  cw;       // exponent codeword, right aligned
    logic [CWL_W-1:0] cw_len;
  } pk_ent_t;

endpackage
