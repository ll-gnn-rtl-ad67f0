// jedi_head: the MLP head phi_O (DNN3), which turns the per-particle outputs
// O of a jet into NCLS class scores.
//
// The O columns of one graph arrive one per o_valid, the last one flagged by
// o_last. They are summed feature by feature in Q16.16 as they arrive, so the
// head never holds the whole O matrix and never stalls its input; at o_last
// the Q12.12 sum vector enters phi_O, whose last layer is linear. Scores
// leave on y_valid 1 + NL_P*R_PHI cycles after o_last. The next graph's
// columns may follow o_last immediately. phi_O and its reuse factor follow
// the paper; reducing O over the particles before phi_O is taken from the
// original JEDI-net formulation, and leaving out the final softmax (the
// scores order the classes just the same) is this design's choice.
module jedi_head
  import jedi_pkg::*;
#(
  parameter int unsigned NL_P  = 2,
  parameter int unsigned DIMS_P [MAXL+1] = '{48, 48, 5, 0, 0, 0, 0, 0, 0},
  parameter int unsigned R_PHI = 1,
  parameter int unsigned NW_P  = mlp_nw(NL_P, DIMS_P),
  parameter int unsigned DO    = DIMS_P[0],
  parameter int unsigned NCLS  = DIMS_P[NL_P]
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  o_valid,
  input  logic  o_last,
  input  data_t o_col [DO],
  input  data_t w_phi [NW_P],
  output logic  y_valid,
  output data_t y [NCLS]
);
  sum_t  sum_q [DO];
  sum_t  sum_d [DO];
  logic  fresh_q;          // next column starts a new graph
  logic  p_valid;
  data_t p_x [DO];

  always_comb
    for (int j = 0; j < DO; j++)
      sum_d[j] = (fresh_q ? '0 : sum_q[j]) + data_to_term(o_col[j]);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      fresh_q <= 1'b1;
      p_valid <= 1'b0;
      for (int j = 0; j < DO; j++) begin
        sum_q[j] <= '0;
        p_x[j]   <= '0;
      end
    end else begin
      p_valid <= o_valid && o_last;
      if (o_valid) begin
        sum_q   <= sum_d;
        fresh_q <= o_last;
        if (o_last)
          for (int j = 0; j < DO; j++) p_x[j] <= acc_to_data(sat_acc(sum_d[j]));
      end
    end
  end

  mlp #(.NL(NL_P), .DIMS(DIMS_P), .REUSE(R_PHI), .LAST_RELU(1'b0)) u_phi (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (p_valid),
    .in_x     (p_x),
    .wts      (w_phi),
    .out_valid(y_valid),
    .out_y    (y)
  );
endmodule
