// global_histogram: merged exponent histogram of one layer's training window.
//
// Lanes' local caches write evicted {exponent, count} pairs here, one at a time
// through hist_arbiter. Each update is a three-cycle read-modify-write, which
// is why the arbiter holds the port for three cycles: cycle 1 registers the
// update, cycle 2 searches the table (an exponent already present adds to its
// count, a new one takes the first free slot), cycle 3 writes the result.
//
// The table has NSYM-1 = 31 symbol slots; the paper sizes codebook generation
// for 32 entries because profiling found fewer than 32 distinct exponents.
// The 32nd entry presented to the sorter is the escape leaf (valid, count 0),
// which reserves the all-ones escape codeword in every codebook (this design's
// way of keeping the escape code free). An exponent that finds the table full
// is dropped and raises overflow; it will later be sent through the escape.
// The escape leaf entry hist[31] is a constant {valid 1, exponent 0, count 0}
// on purpose: its 25 output bits never change.
//
// Interface: upd_valid/upd_sym/upd_cnt come from the granted lane; hist holds
// the 32 entries for the sorter; idle is high when no update is in flight;
// clear empties the table at the start of a layer.
module global_histogram
  import lexi_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             upd_valid,
  input  logic [EXP_W-1:0] upd_sym,
  input  logic [CNT_W-1:0] upd_cnt,
  output hist_ent_t        hist [NSYM],
  output logic             idle,
  output logic             overflow
);
  localparam int unsigned NS = NSYM - 1;

  hist_ent_t        tab_q [NS];
  logic             s1_v_q, s2_v_q;
  logic [EXP_W-1:0] s1_sym_q, s2_sym_q;
  logic [CNT_W-1:0] s1_cnt_q, s2_cnt_q;
  logic [4:0]       s2_idx_q;
  logic             s2_ok_q;

  logic             hit_f, free_f;
  logic [4:0]       hit_i, free_i;

  always_comb begin
    hit_f = 1'b0; hit_i = '0; free_f = 1'b0; free_i = '0;
    for (int i = 0; i < NS; i++) begin
      if (!hit_f && tab_q[i].valid && tab_q[i].sym == s1_sym_q) begin
        hit_f = 1'b1; hit_i = 5'(i);
      end
      if (!free_f && !tab_q[i].valid) begin
        free_f = 1'b1; free_i = 5'(i);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v_q <= 1'b0; s2_v_q <= 1'b0;
      s1_sym_q <= '0; s1_cnt_q <= '0; s2_sym_q <= '0; s2_cnt_q <= '0;
      s2_idx_q <= '0; s2_ok_q <= 1'b0;
      overflow <= 1'b0;
      for (int i = 0; i < NS; i++) tab_q[i] <= '0;
    end else if (clear) begin
      s1_v_q <= 1'b0; s2_v_q <= 1'b0;
      overflow <= 1'b0;
      for (int i = 0; i < NS; i++) tab_q[i] <= '0;
    end else begin
      overflow <= 1'b0;
      // cycle 1: register the update
      s1_v_q   <= upd_valid;
      s1_sym_q <= upd_sym;
      s1_cnt_q <= upd_cnt;
      // cycle 2: search and add
      s2_v_q   <= s1_v_q;
      s2_sym_q <= s1_sym_q;
      s2_idx_q <= hit_f ? hit_i : free_i;
      s2_ok_q  <= hit_f || free_f;
      if (hit_f) begin
        s2_cnt_q <= ((CNT_W+1)'(tab_q[hit_i].cnt) + (CNT_W+1)'(s1_cnt_q) > (CNT_W+1)'({CNT_W{1'b1}}))
                    ? '1 : tab_q[hit_i].cnt + s1_cnt_q;
      end else begin
        s2_cnt_q <= s1_cnt_q;
      end
      // cycle 3: write back
      if (s2_v_q) begin
        if (s2_ok_q) tab_q[s2_idx_q] <= '{valid: 1'b1, sym: s2_sym_q, cnt: s2_cnt_q};
        else         overflow <= 1'b1;
      end
    end
  end

  always_comb begin
    for (int i = 0; i < NS; i++) hist[i] = tab_q[i];
    hist[NS] = '{valid: 1'b1, sym: '0, cnt: '0};   // escape leaf
  end

  assign idle = !upd_valid && !s1_v_q && !s2_v_q;

  // updates arrive at most once per three cycles (the arbiter's hold)
  a_spacing: assert property (@(posedge clk) disable iff (!rst_n || clear)
                              upd_valid |=> !upd_valid ##1 !upd_valid);

endmodule
