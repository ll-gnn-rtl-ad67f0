// edge_gather: MMM1, MMM2 and Concat1 of the interaction network, reduced to
// index arithmetic.
//
// In a fully connected graph of NO nodes with NO*(NO-1) directed edges, edge
// e = i*(NO-1)+k is received by node i and sent by node k when k < i, by
// node k+1 otherwise. Column e of B = [I*Rr ; I*Rs] is therefore just the
// receiver's feature column stacked on the sender's, and no adjacency matrix
// is stored or multiplied. For receiver `node` and edge group `grp` the unit
// forms the NFR columns k = grp*NFR + q (q = 0..NFR-1) in one cycle; lanes
// with k >= NO-1 (the tail of the last group) are flagged off in b_mask.
// Rows 0..P-1 of a column hold the receiver (B1), rows P..2P-1 the sender
// (B2). The edge numbering, the sender index rule and the B1-over-B2 order
// follow the paper; registering the result once is this design's choice.
//
// Timing: issue/node/grp in cycle t give b_* in cycle t+1. b_first marks
// group 0 of a node, b_last its last group (NG-1), so the aggregator knows
// where a node's edges begin and end.
module edge_gather
  import jedi_pkg::*;
#(
  parameter int unsigned NO  = 30,
  parameter int unsigned P   = 16,
  parameter int unsigned NFR = 29,
  parameter int unsigned NG  = (NO - 1 + NFR - 1) / NFR,
  parameter int unsigned NB  = $clog2(NO),
  parameter int unsigned GB  = (NG > 1) ? $clog2(NG) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  data_t         i_mat  [NO][P],
  input  logic          issue,
  input  logic [NB-1:0] node,
  input  logic [GB-1:0] grp,
  output logic          b_valid,
  output logic          b_first,
  output logic          b_last,
  output logic          b_mask [NFR],
  output data_t         b_cols [NFR][2*P]
);
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      b_valid <= 1'b0;
      b_first <= 1'b0;
      b_last  <= 1'b0;
      for (int q = 0; q < NFR; q++) begin
        b_mask[q] <= 1'b0;
        for (int j = 0; j < 2 * P; j++) b_cols[q][j] <= '0;
      end
    end else begin
      b_valid <= issue;
      b_first <= issue && (grp == '0);
      b_last  <= issue && (32'(grp) == NG - 1);
      for (int q = 0; q < NFR; q++) begin
        int k, snd;
        k   = 32'(grp) * NFR + q;
        snd = (k < 32'(node)) ? k : k + 1;     // MMM2: sender of edge (node, k)
        if (snd > NO - 1) snd = NO - 1;        // only for lanes masked off
        b_mask[q] <= issue && (k < NO - 1);
        for (int j = 0; j < P; j++) begin
          b_cols[q][j]     <= i_mat[node][j];  // MMM1: receiver features
          b_cols[q][P + j] <= i_mat[snd][j];   // Concat1: sender below
        end
      end
    end
  end
endmodule
