// huffman_tree_builder: Huffman code lengths from a rank-sorted histogram.
//
// The paper builds the tree by repeatedly merging the two least frequent
// nodes, with a priority queue backed by the sorted list, taking at most 31
// cycles for 32 leaves. This block does exactly one merge per cycle with the
// classic two-queue method: leaves are read from the sorted list, smallest
// first, and merged nodes are appended to a second queue whose weights come
// out in non-decreasing order, so the two smallest nodes are always among the
// two heads of each queue. Each node carries a bit mask of the leaves below
// it; a merge adds one to the code length of every leaf in both masks. On a
// weight tie a leaf is taken before a merged node.
//
// The last entry of the list is the escape leaf (weight 0). After the merges
// the escape leaf is given the longest code length (its length is swapped
// with that of the last-ranked exponent of that length, which keeps the code
// complete), so canonical assignment hands it the all-ones codeword. This
// swap is this design's way of reserving the paper's all-ones escape code.
//
// Interface: start loads din (descending counts, valid entries first) and
// the merges begin; done pulses with dout (rank order, {exponent, length})
// and n (number of leaves) valid until the next start. busy is high
// meanwhile. n-1 merge cycles, i.e. 31 for a full list.
module huffman_tree_builder
  import lexi_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  hist_ent_t din  [NSYM],
  output logic      busy,
  output logic      done,
  output cb_ent_t   dout [NSYM],
  output logic [5:0] n
);
  localparam int unsigned WW = CNT_W + 6;   // merged weights

  logic [EXP_W-1:0] sym_q  [NSYM];
  logic [CNT_W-1:0] w_q    [NSYM];
  logic [LEN_W-1:0] len_q  [NSYM];
  logic [5:0]       n_q;
  logic [5:0]       lp_q;                   // leaves consumed
  logic [WW-1:0]    iw_q   [NSYM];          // internal node queue: weights
  logic [NSYM-1:0]  im_q   [NSYM];          // internal node queue: leaf masks
  logic [4:0]       ih_q, it_q;             // queue head / tail
  logic [5:0]       merges_q;

  // heads of both queues
  logic             l0_ok, l1_ok, i0_ok, i1_ok;
  logic [4:0]       l0_r, l1_r;             // ranks of the two smallest leaves
  logic [WW-1:0]    l0_w, l1_w, i0_w, i1_w;
  logic [NSYM-1:0]  l0_m, l1_m, i0_m, i1_m;
  logic [WW-1:0]    a_w, b_w;
  logic [NSYM-1:0]  a_m, b_m;
  logic [1:0]       take_l, take_i;         // how many of each queue are consumed

  always_comb begin
    l0_ok = (lp_q < n_q);
    l1_ok = (lp_q + 6'd1 < n_q);
    i0_ok = (ih_q < it_q);
    i1_ok = (ih_q + 5'd1 < it_q);
    l0_r  = 5'(n_q - 6'd1 - lp_q);
    l1_r  = 5'(n_q - 6'd2 - lp_q);
    l0_w  = WW'(w_q[l0_r]);
    l1_w  = WW'(w_q[l1_r]);
    l0_m  = NSYM'(1) << l0_r;
    l1_m  = NSYM'(1) << l1_r;
    i0_w  = iw_q[ih_q];
    i1_w  = iw_q[5'(ih_q + 5'd1)];
    i0_m  = im_q[ih_q];
    i1_m  = im_q[5'(ih_q + 5'd1)];
    if (l0_ok && (!i0_ok || l0_w <= i0_w)) begin
      a_w = l0_w; a_m = l0_m;
      if (l1_ok && (!i0_ok || l1_w <= i0_w)) begin
        b_w = l1_w; b_m = l1_m; take_l = 2'd2; take_i = 2'd0;
      end else begin
        b_w = i0_w; b_m = i0_m; take_l = 2'd1; take_i = 2'd1;
      end
    end else begin
      a_w = i0_w; a_m = i0_m;
      if (l0_ok && (!i1_ok || l0_w <= i1_w)) begin
        b_w = l0_w; b_m = l0_m; take_l = 2'd1; take_i = 2'd1;
      end else begin
        b_w = i1_w; b_m = i1_m; take_l = 2'd0; take_i = 2'd2;
      end
    end
  end

  // escape length swap on the final lengths
  logic [LEN_W-1:0] maxlen;
  logic [4:0]       esc_r, swp_r;
  logic             swp_f;
  always_comb begin
    maxlen = '0;
    esc_r  = 5'(n_q - 6'd1);
    swp_f  = 1'b0;
    swp_r  = '0;
    for (int r = 0; r < NSYM; r++) begin
      if (6'(r) < n_q && len_q[r] > maxlen) maxlen = len_q[r];
    end
    for (int r = 0; r < NSYM; r++) begin
      if (6'(r) + 6'd1 < n_q && len_q[r] == maxlen) begin
        swp_f = 1'b1;
        swp_r = 5'(r);
      end
    end
    for (int r = 0; r < NSYM; r++) begin
      dout[r].sym = sym_q[r];
      dout[r].len = (6'(r) < n_q) ? len_q[r] : '0;
    end
    if (len_q[esc_r] != maxlen && swp_f) begin
      dout[esc_r].len = maxlen;
      dout[swp_r].len = len_q[esc_r];
    end
  end

  logic [5:0] n_in;
  always_comb begin
    n_in = '0;
    for (int r = 0; r < NSYM; r++) n_in += 6'(din[r].valid);
  end

  assign n = n_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0;
      n_q <= '0; lp_q <= '0; ih_q <= '0; it_q <= '0; merges_q <= '0;
      for (int r = 0; r < NSYM; r++) begin
        sym_q[r] <= '0; w_q[r] <= '0; len_q[r] <= '0; iw_q[r] <= '0; im_q[r] <= '0;
      end
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1;
        n_q  <= n_in;
        lp_q <= '0; ih_q <= '0; it_q <= '0; merges_q <= '0;
        for (int r = 0; r < NSYM; r++) begin
          sym_q[r] <= din[r].sym;
          w_q[r]   <= din[r].cnt;
          len_q[r] <= '0;
        end
      end else if (busy) begin
        if (n_q <= 6'd1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          // one merge per cycle; the (n-1)-th merge is the last
          iw_q[it_q] <= a_w + b_w;
          im_q[it_q] <= a_m | b_m;
          it_q       <= it_q + 5'd1;
          ih_q       <= ih_q + 5'(take_i);
          lp_q       <= lp_q + 6'(take_l);
          merges_q   <= merges_q + 6'd1;
          for (int r = 0; r < NSYM; r++) begin
            if (a_m[r] || b_m[r]) len_q[r] <= len_q[r] + 1'b1;
          end
          if (merges_q + 6'd2 >= n_q) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

endmodule
