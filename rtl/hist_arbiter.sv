// hist_arbiter: grants the single global-histogram write port to one lane.
//
// The paper resolves competition for the histogram port with a simple
// arbiter that grants the first arriving request exclusive use for a fixed
// three cycles. Arrival order is kept in an age matrix: older_q[i][j] is set
// when request i arrived before request j. Requests that arrive in the same
// cycle are ordered by lane index (lower first), which is this design's choice.
// A request stays raised until it is granted.
//
// Interface: req[i] is lane i's eviction-valid. When the port is free the
// oldest request wins: gnt[i] pulses for one cycle (it is also the lane's
// ready), gnt_idx names the winner and the port is then busy for HOLD cycles
// in total, during which no other grant is issued. busy is high while the
// port is held.
module hist_arbiter #(
  parameter int unsigned M    = 10,
  parameter int unsigned HOLD = 3
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [M-1:0]               req,
  output logic [M-1:0]               gnt,
  output logic [$clog2(M+1)-1:0]     gnt_idx,
  output logic                       busy
);
  localparam int unsigned HW = $clog2(HOLD + 1);

  logic [M-1:0] older_q [M];
  logic [M-1:0] seen_q;          // request already entered in the age matrix
  logic [HW-1:0] hold_q;
  logic [M-1:0] is_new;
  logic [M-1:0] oldest;

  assign is_new = req & ~seen_q;
  assign busy   = (hold_q != '0);

  // a pending, already recorded request is oldest if no other recorded one is older
  always_comb begin
    for (int i = 0; i < M; i++) begin
      oldest[i] = req[i] && seen_q[i];
      for (int j = 0; j < M; j++) begin
        if (j != i && req[j] && seen_q[j] && older_q[j][i]) oldest[i] = 1'b0;
      end
    end
  end

  always_comb begin
    gnt     = '0;
    gnt_idx = '0;
    if (!busy) begin
      for (int i = M - 1; i >= 0; i--) begin
        if (oldest[i]) begin
          gnt     = '0;
          gnt[i]  = 1'b1;
          gnt_idx = ($clog2(M+1))'(i);
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seen_q <= '0;
      hold_q <= '0;
      for (int i = 0; i < M; i++) older_q[i] <= '0;
    end else begin
      if (busy) hold_q <= hold_q - 1'b1;
      else if (gnt != '0) hold_q <= HW'(HOLD - 1);
      seen_q <= (seen_q | is_new) & req & ~gnt;
      for (int i = 0; i < M; i++) begin
        if (is_new[i]) begin
          for (int j = 0; j < M; j++) begin
            // row i: i is older only than requests arriving with it at a higher index
            older_q[i][j] <= is_new[j] && (i < j);
            // column i: every request already waiting is older than i
            if (!is_new[j]) older_q[j][i] <= 1'b1;
          end
        end
      end
    end
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt));
  a_hold:   assert property (@(posedge clk) disable iff (!rst_n) (gnt != '0) |=> (gnt == '0)[*HOLD-1]);

endmodule
