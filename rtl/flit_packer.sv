// flit_packer: packs values and their exponent codewords into flits.
//
// The egress network interface collects the lanes' outputs in a small queue
// and emits at most one flit per cycle, the link's rate. A data flit takes the
// longest run of queued compressed values that fits: at most NMAX (10) values
// and at most PAY_W (94) payload bits, each value costing 8 bits (sign and
// mantissa) plus its codeword. The payload is laid out as in the paper:
// all signs, then all mantissas, then the codewords back to back, MSB first,
// zero padded. Values still in the raw (pre-codebook) phase go out as FK_RAW
// flits of up to five BF16 words. A flit never mixes the two kinds.
//
// A flit is sent as soon as it is full (the next value does not fit, or the
// count limit is reached) or when the upstream offers no new input in that
// cycle (in_pend low), so a stream is never held back waiting for more data. Codebook flits from the
// compressor (cb_*) take priority over queued data; cb_ready is therefore
// simply the link's out_ready (a waiting codebook flit always goes next).
//
// Interface: in_valid/in_cnt/in_ent push up to M values per cycle while
// in_ready (room for M more, after this cycle's flit); in_pend tells whether
// the upstream is offering data at all, accepted or not; out_valid/out_flit/out_ready is the link side;
// comp_q counts queued compressed values (the compressor waits for zero
// before it lets a new codebook overtake the queue).
module flit_packer
  import lexi_pkg::*;
#(
  parameter int unsigned M  = 10,
  parameter int unsigned QD = 2 * M
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_pend,
  input  logic                  in_valid,
  input  logic [$clog2(M+1)-1:0] in_cnt,
  input  pk_ent_t               in_ent [M],
  output logic                  in_ready,
  input  logic                  cb_valid,
  input  flit_t                 cb_flit,
  output logic                  cb_ready,
  output logic                  out_valid,
  output flit_t                 out_flit,
  input  logic                  out_ready,
  output logic [$clog2(QD+1)-1:0] comp_q
);
  localparam int unsigned QW = $clog2(QD + 1);

  pk_ent_t       q_q [QD];
  logic [QW-1:0] qn_q;

  // ---- how many head entries form the next flit -------------------------
  logic [3:0]    k;
  logic          full;
  always_comb begin
    int unsigned bits;
    logic        stop;
    k    = '0;
    bits = 0;
    stop = 1'b0;
    for (int i = 0; i < NMAX; i++) begin
      if (!stop && 32'(i) < 32'(qn_q) && q_q[i].raw == q_q[0].raw) begin
        if (q_q[0].raw) begin
          if (i < RAW_MAX) k = 4'(i + 1);
          else stop = 1'b1;
        end else if (bits + 8 + 32'(q_q[i].cw_len) <= PAY_W) begin
          bits = bits + 8 + 32'(q_q[i].cw_len);
          k    = 4'(i + 1);
        end else begin
          stop = 1'b1;
        end
      end else begin
        stop = 1'b1;
      end
    end
    full = (32'(k) < 32'(qn_q)) || (k == (q_q[0].raw ? 4'(RAW_MAX) : 4'(NMAX)));
  end

  // ---- payload of the data flit ------------------------------------------
  logic [PAY_W-1:0] pay;
  always_comb begin
    logic [PAY_W-1:0] sgn, man, ex;
    int unsigned      off;
    sgn = '0; man = '0; ex = '0; off = 0;
    if (q_q[0].raw) begin
      for (int i = 0; i < RAW_MAX; i++) begin
        if (4'(i) < k) sgn[PAY_W-1-16*i -: 16] = q_q[i].v;
      end
      pay = sgn;
    end else begin
      for (int i = 0; i < NMAX; i++) begin
        if (4'(i) < k) begin
          sgn[PAY_W-1-i]         = q_q[i].v.sign;
          man[PAY_W-1-7*i -: 7]  = q_q[i].v.man;
          // left align the codeword, then move it behind the earlier ones
          ex  = ex | (({q_q[i].cw, {(PAY_W-CW_W){1'b0}}} << (CW_W - 32'(q_q[i].cw_len))) >> off);
          off = off + 32'(q_q[i].cw_len);
        end
      end
      pay = sgn | (man >> k) | (ex >> (8 * 32'(k)));
    end
  end

  logic emit;
  assign cb_ready  = out_ready;
  assign emit      = !cb_valid && out_ready && (k != '0) && (full || !in_pend);
  assign out_valid = cb_valid || ((k != '0) && (full || !in_pend));
  // room for M more, counting the values a full flit frees in this cycle
  assign in_ready  = (32'(qn_q) + M <= QD) ||
                     (full && out_ready && !cb_valid && 32'(qn_q) - 32'(k) + M <= QD);

  always_comb begin
    if (cb_valid) begin
      out_flit = cb_flit;
    end else begin
      out_flit.kind    = q_q[0].raw ? FK_RAW : FK_DATA;
      out_flit.count   = k;
      out_flit.payload = pay;
    end
  end

  always_comb begin
    comp_q = '0;
    for (int i = 0; i < QD; i++) begin
      if (32'(i) < 32'(qn_q) && !q_q[i].raw) comp_q = comp_q + 1'b1;
    end
  end

  // ---- queue: pop k, then append the new values ---------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      qn_q <= '0;
      for (int i = 0; i < QD; i++) q_q[i] <= '0;
    end else begin
      logic [QW-1:0] pop, base;
      pop  = emit ? QW'(k) : '0;
      base = qn_q - pop;
      for (int i = 0; i < QD; i++) begin
        if (32'(i) + 32'(pop) < QD) q_q[i] <= q_q[32'(i) + 32'(pop)];
      end
      if (in_valid && in_ready) begin
        for (int j = 0; j < M; j++) begin
          if (32'(j) < 32'(in_cnt)) q_q[32'(base) + j] <= in_ent[j];
        end
        qn_q <= base + QW'(in_cnt);
      end else begin
        qn_q <= base;
      end
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                 out_valid && !out_ready && cb_valid |=> out_valid);

endmodule
