// bitonic_sorter: pipelined Batcher bitonic sorting network, descending.
//
// Sorts N histogram entries by count, largest first, so that the Huffman tree
// builder sees the exponents in rank order. As in the paper, the network has
// log2(N)*(log2(N)+1)/2 compare-exchange stages (15 for N = 32), each
// registered, so a result appears 15 cycles after its input and a new set
// can enter every cycle.
//
// The sort key is {count, valid}: valid entries with equal counts sort ahead
// of empty slots, which puts the escape leaf (valid, count 0) right after the
// real exponents and ahead of the unused slots. Ties between real exponents
// are broken by the network's fixed structure.
//
// Interface: in_valid/din load a set; out_valid/dout present it sorted,
// STAGES cycles later.
module bitonic_sorter
  import lexi_pkg::*;
#(
  parameter int unsigned N = NSYM
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  hist_ent_t din  [N],
  output logic      out_valid,
  output hist_ent_t dout [N]
);
  localparam int unsigned LOGN   = $clog2(N);
  localparam int unsigned STAGES = LOGN * (LOGN + 1) / 2;

  hist_ent_t  st  [STAGES+1][N];
  logic       vld [STAGES+1];

  function automatic logic [CNT_W:0] key(input hist_ent_t e);
    return {e.cnt, e.valid};
  endfunction

  assign st[0]  = din;
  assign vld[0] = in_valid;

  for (genvar p = 1; p <= LOGN; p++) begin : g_phase
    for (genvar q = p - 1; q >= 0; q--) begin : g_step
      localparam int unsigned S = (p * (p - 1)) / 2 + (p - 1 - q);  // stage index
      localparam int unsigned K = 1 << p;                            // block size
      localparam int unsigned J = 1 << q;                            // partner distance
      hist_ent_t nxt [N];
      always_comb begin
        for (int i = 0; i < N; i++) begin
          int unsigned l;
          logic        desc, swap;
          l = i ^ J;
          // the final merge direction is descending; blocks alternate direction
          desc = ((i & K) == 0);
          if (l > i) begin
            swap = desc ? (key(st[S][i]) < key(st[S][l])) : (key(st[S][i]) > key(st[S][l]));
            nxt[i] = swap ? st[S][l] : st[S][i];
          end else begin
            swap = desc ? (key(st[S][l]) < key(st[S][i])) : (key(st[S][l]) > key(st[S][i]));
            nxt[i] = swap ? st[S][l] : st[S][i];
          end
        end
      end
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          vld[S+1] <= 1'b0;
          for (int i = 0; i < N; i++) st[S+1][i] <= '0;
        end else begin
          vld[S+1] <= vld[S];
          st[S+1]  <= nxt;
        end
      end
    end
  end

  assign dout      = st[STAGES];
  assign out_valid = vld[STAGES];

endmodule
