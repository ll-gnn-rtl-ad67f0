// mlp: a multilayer perceptron built as a chain of fc_layer stages, used for
// the edge function f_R (DNN1), the node function f_O (DNN2) and the head
// phi_O (DNN3).
//
// Layer l maps DIMS[l] inputs to DIMS[l+1] outputs; NL layers in all. Every
// layer has a register stage and the same reuse factor REUSE, so a vector
// leaves NL*REUSE cycles after it enters and a new one may enter every REUSE
// cycles. Hidden layers use ReLU; the last one does too unless LAST_RELU = 0.
// The weights arrive as one flat array wts[]: for each layer in turn its
// weights row by row (w[o][i] at o*DIMS[l]+i) followed by its biases, the
// layout jedi_pkg::mlp_off describes. That several copies of f_R read one
// weight store, and the layout itself, are this design's choices; the layer
// sizes come from the configurations the paper evaluates.
module mlp
  import jedi_pkg::*;
#(
  parameter int unsigned NL              = 2,
  parameter int unsigned DIMS [MAXL+1]   = '{4, 4, 4, 0, 0, 0, 0, 0, 0},
  parameter int unsigned REUSE           = 1,
  parameter bit          LAST_RELU       = 1'b1,
  parameter int unsigned NW              = mlp_nw(NL, DIMS)
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  data_t in_x  [DIMS[0]],
  input  data_t wts   [NW],
  output logic  out_valid,
  output data_t out_y [DIMS[NL]]
);
  for (genvar l = 0; l < NL; l++) begin : g_layer
    localparam int unsigned LI  = DIMS[l];
    localparam int unsigned LO  = DIMS[l+1];
    localparam int unsigned OFF = mlp_off(l, DIMS);

    data_t x [LI];
    data_t y [LO];
    data_t w [LO][LI];
    data_t b [LO];
    logic  vi, vo;

    always_comb begin
      for (int o = 0; o < LO; o++) begin
        for (int i = 0; i < LI; i++) w[o][i] = wts[OFF + o * LI + i];
        b[o] = wts[OFF + LO * LI + o];
      end
    end

    if (l == 0) begin : g_first
      assign vi = in_valid;
      always_comb x = in_x;
    end else begin : g_next
      assign vi = g_layer[l-1].vo;
      always_comb x = g_layer[l-1].y;
    end

    fc_layer #(
      .IN   (LI),
      .OUT  (LO),
      .REUSE(REUSE),
      .RELU ((l < NL - 1) ? 1'b1 : LAST_RELU)
    ) u_fc (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (vi),
      .in_x     (x),
      .w        (w),
      .b        (b),
      .out_valid(vo),
      .out_y    (y)
    );
  end

  assign out_valid = g_layer[NL-1].vo;
  always_comb out_y = g_layer[NL-1].y;

endmodule
