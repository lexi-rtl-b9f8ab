// local_cache: per-lane exponent frequency cache of the compressor.
//
// Each lane of the histogram front end owns one of these. An arriving exponent
// is compared against all DEPTH entries at once. On a hit the matching entry's
// count is incremented. On a miss a free entry is taken if there is one;
// otherwise the oldest entry (first in, first out) is evicted into a one-entry
// eviction register, from where it is written to the global histogram, and
// its slot receives the new exponent with a count of one. This follows the
// paper; the FIFO order of "oldest" and the single eviction register are this
// design's choices.
//
// Interface: in_valid/in_exp deliver one exponent per cycle; in_ready drops
// while the cache is full and the eviction register is still waiting for the
// histogram (the lane then stalls; in_ready does not depend on in_valid). ev_valid/ev_ready hand an
// evicted {exponent, count} pair to the histogram arbiter. flush drains every
// entry through the same path; empty is high when nothing is left. clear
// drops the contents at the start of a layer. hit/miss are one-cycle event
// strobes.
module local_cache
  import lexi_pkg::*;
#(
  parameter int unsigned DEPTH = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             in_valid,
  input  logic [EXP_W-1:0] in_exp,
  output logic             in_ready,
  input  logic             flush,
  output logic             ev_valid,
  output logic [EXP_W-1:0] ev_sym,
  output logic [CNT_W-1:0] ev_cnt,
  input  logic             ev_ready,
  output logic             empty,
  output logic             hit,
  output logic             miss
);
  localparam int unsigned IW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [EXP_W-1:0] sym_q [DEPTH];
  logic [CNT_W-1:0] cnt_q [DEPTH];
  logic [IW-1:0]    head_q;       // oldest entry
  logic [IW:0]      used_q;       // number of valid entries
  logic             evv_q;
  logic [EXP_W-1:0] evs_q;
  logic [CNT_W-1:0] evc_q;

  logic             match;
  logic [IW-1:0]    match_idx;
  logic             full;
  logic             ev_free;      // eviction register can take an entry now
  logic [IW-1:0]    tail;

  // an entry is valid if it lies within used_q entries from head_q
  function automatic logic is_valid(input logic [IW-1:0] idx, input logic [IW-1:0] head,
                                    input logic [IW:0] used);
    logic [IW:0] dst;
    dst = (IW+1)'((idx >= head) ? (32'(idx) - 32'(head)) : (DEPTH - 32'(head) + 32'(idx)));
    return dst < used;
  endfunction

  always_comb begin
    match     = 1'b0;
    match_idx = '0;
    for (int i = 0; i < DEPTH; i++) begin
      if (!match && is_valid(IW'(i), head_q, used_q) && sym_q[i] == in_exp) begin
        match     = 1'b1;
        match_idx = IW'(i);
      end
    end
  end

  assign full     = (used_q == (IW+1)'(DEPTH));
  assign ev_free  = !evv_q || ev_ready;
  assign tail     = IW'((32'(head_q) + 32'(used_q)) % DEPTH);
  assign in_ready = (!full || ev_free) && !flush;
  assign ev_valid = evv_q;
  assign ev_sym   = evs_q;
  assign ev_cnt   = evc_q;
  assign empty    = (used_q == '0) && !evv_q;
  assign hit      = in_valid && in_ready && match;
  assign miss     = in_valid && in_ready && !match;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head_q <= '0;
      used_q <= '0;
      evv_q  <= 1'b0;
      evs_q  <= '0;
      evc_q  <= '0;
      for (int i = 0; i < DEPTH; i++) begin
        sym_q[i] <= '0;
        cnt_q[i] <= '0;
      end
    end else if (clear) begin
      head_q <= '0;
      used_q <= '0;
      evv_q  <= 1'b0;
    end else begin
      if (evv_q && ev_ready) evv_q <= 1'b0;
      if (flush) begin
        if (used_q != '0 && ev_free) begin
          evv_q  <= 1'b1;
          evs_q  <= sym_q[head_q];
          evc_q  <= cnt_q[head_q];
          head_q <= IW'((32'(head_q) + 1) % DEPTH);
          used_q <= used_q - 1'b1;
        end
      end else if (in_valid && in_ready) begin
        if (match) begin
          if (cnt_q[match_idx] != '1) cnt_q[match_idx] <= cnt_q[match_idx] + 1'b1;
        end else if (!full) begin
          sym_q[tail] <= in_exp;
          cnt_q[tail] <= CNT_W'(1);
          used_q      <= used_q + 1'b1;
        end else begin
          // evict the oldest, reuse its slot for the newcomer (now youngest)
          evv_q          <= 1'b1;
          evs_q          <= sym_q[head_q];
          evc_q          <= cnt_q[head_q];
          sym_q[head_q]  <= in_exp;
          cnt_q[head_q]  <= CNT_W'(1);
          head_q         <= IW'((32'(head_q) + 1) % DEPTH);
        end
      end
    end
  end

  // the eviction register is held until the arbiter takes it
  property p_ev_hold;
    @(posedge clk) disable iff (!rst_n || clear)
      (ev_valid && !ev_ready) |=> (ev_valid && $stable(ev_sym) && $stable(ev_cnt));
  endproperty
  a_ev_hold: assert property (p_ev_hold);

endmodule
