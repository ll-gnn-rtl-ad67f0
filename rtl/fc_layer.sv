// fc_layer: one fully connected layer y = act(W x + b) with a reuse factor.
//
// With REUSE = R the layer owns ceil(IN/R) x OUT multipliers and spends R
// cycles on a vector: in cycle c it multiplies inputs [c*CH, c*CH+CH) by their
// weights and adds the products to per-output Q16.16 accumulators, which start
// at the bias. R = 1 is the fully parallel layer, R = IN the fully serial one
// (one multiplier per output). The reuse factor and the Q12.12 / Q16.16
// formats follow the paper; the split of the inputs into consecutive chunks,
// the single register stage and the ReLU option are this design's choices.
//
// Interface: in_valid/in_x present a vector; weights w[o][i] and biases b[o]
// are static inputs. out_valid pulses with out_y exactly REUSE cycles after
// in_valid. in_x only has to be valid in the in_valid cycle. A new vector may
// be offered at most every REUSE cycles; the assertion below flags a
// vector offered while the previous one is still being folded.
module fc_layer
  import jedi_pkg::*;
#(
  parameter int unsigned IN    = 4,
  parameter int unsigned OUT   = 4,
  parameter int unsigned REUSE = 1,
  parameter bit          RELU  = 1'b1
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  data_t in_x [IN],
  input  data_t w    [OUT][IN],
  input  data_t b    [OUT],
  output logic  out_valid,
  output data_t out_y [OUT]
);
  localparam int unsigned CH = (IN + REUSE - 1) / REUSE;  // inputs per cycle
  localparam int unsigned CW = (REUSE > 1) ? $clog2(REUSE) : 1;

  data_t         x_q   [IN];
  sum_t          acc_q [OUT];
  sum_t          acc_d [OUT];
  logic [CW-1:0] cnt_q;
  logic          run_q;
  logic [CW-1:0] chunk;
  logic          step;
  logic          last;

  assign chunk = run_q ? cnt_q : '0;
  assign step  = run_q | in_valid;
  assign last  = (32'(chunk) == REUSE - 1);

  always_comb begin
    for (int o = 0; o < OUT; o++) begin
      acc_d[o] = run_q ? acc_q[o] : data_to_term(b[o]);
      for (int t = 0; t < CH; t++) begin
        int idx;
        idx = 32'(chunk) * CH + t;
        if (idx < IN)
          acc_d[o] += mul_term(run_q ? x_q[idx] : in_x[idx], w[o][idx]);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      run_q     <= 1'b0;
      cnt_q     <= '0;
      out_valid <= 1'b0;
      for (int o = 0; o < OUT; o++) begin
        acc_q[o] <= '0;
        out_y[o] <= '0;
      end
      for (int i = 0; i < IN; i++) x_q[i] <= '0;
    end else begin
      out_valid <= 1'b0;
      if (step) begin
        if (!run_q) x_q <= in_x;
        if (last) begin
          run_q     <= 1'b0;
          cnt_q     <= '0;
          out_valid <= 1'b1;
          for (int o = 0; o < OUT; o++) begin
            data_t y;
            y = acc_to_data(sat_acc(acc_d[o]));
            out_y[o] <= (RELU ? relu(y) : y);
          end
        end else begin
          run_q <= 1'b1;
          cnt_q <= chunk + 1'b1;
          acc_q <= acc_d;
        end
      end
    end
  end

  // a new vector must not arrive while the previous one is still being folded
  always_ff @(posedge clk)
    if (rst_n) a_no_overrun: assert (!(in_valid && run_q))
      else $error("fc_layer: vector offered while busy");

endmodule
