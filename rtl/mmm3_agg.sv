// mmm3_agg: the aggregation Ebar = E * Rr^T (MMM3), done as an outer product
// that needs neither multiplications nor the matrix Rr.
//
// E arrives column by column, NFR edge columns per cycle, and all edges of a
// receiving node arrive back to back (edges i*(NO-1) .. i*(NO-1)+NO-2). Each
// column of Rr^T has a single one, so column i of Ebar is the plain sum of
// those NO-1 columns of E. Per cycle the unit adds the unmasked lanes to a
// running Q16.16 sum per feature; e_first restarts the sum (tmp = 0 for the
// first edge), e_last ends the node and delivers the Q12.12 column. The
// running-sum structure follows the paper's aggregation loop; the adder tree
// over the NFR lanes, saturation and rounding are this design's choices.
//
// Timing: an e_last in cycle t gives ebar_valid/ebar in cycle t+1.
module mmm3_agg
  import jedi_pkg::*;
#(
  parameter int unsigned NFR = 29,
  parameter int unsigned DE  = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  e_valid,
  input  logic  e_first,
  input  logic  e_last,
  input  logic  e_mask [NFR],
  input  data_t e_cols [NFR][DE],
  output logic  ebar_valid,
  output data_t ebar   [DE]
);
  sum_t acc_q [DE];
  sum_t acc_d [DE];

  always_comb begin
    for (int j = 0; j < DE; j++) begin
      acc_d[j] = e_first ? '0 : acc_q[j];
      for (int q = 0; q < NFR; q++)
        if (e_mask[q]) acc_d[j] += data_to_term(e_cols[q][j]);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ebar_valid <= 1'b0;
      for (int j = 0; j < DE; j++) begin
        acc_q[j] <= '0;
        ebar[j]  <= '0;
      end
    end else begin
      ebar_valid <= e_valid && e_last;
      if (e_valid) begin
        acc_q <= acc_d;
        if (e_last)
          for (int j = 0; j < DE; j++) ebar[j] <= acc_to_data(sat_acc(acc_d[j]));
      end
    end
  end
endmodule
