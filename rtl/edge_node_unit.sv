// edge_node_unit: the fused Edge-Node unit, which runs the whole interaction
// network of one graph (all but the head) as a single fine-grained pipeline.
//
// One node-processing engine handles the receiving nodes i = 0..NO-1 in turn,
// starting a node every II_LOOP cycles. A node's NO-1 incoming edges are
// split into NG = ceil((NO-1)/NFR) groups of NFR; the loop controller is a
// small state machine whose state st counts 0..II_LOOP-1 within a node. In
// states st < NG it issues edge group st (code body A of the fused loop):
//   edge_gather  builds NFR columns of B (MMM1, MMM2, Concat1),
//   NFR copies of f_R (DNN1) turn them into columns of E,
//   mmm3_agg     sums them into column i of Ebar (MMM3, first part).
// After the last group of node i the node part runs (code body B): the
// column of Ebar (MMM3, second part) is stacked on the node's own features
// (Concat2: Ebar in rows 0..DE-1, I in rows DE..DE+P-1) and f_O (DNN2) makes
// column i of O. States st >= NG, present when f_O or phi_O are folded with a
// reuse factor larger than NG, issue nothing.
//   II_LOOP  = max(NG, R_FO, R_PHI)
//   II_model = II_LOOP * NO                (cycles between graphs)
//   latency  = II_LOOP*(NO-1) + DP_LOOP    (first issue to last O column)
//   DP_LOOP  = (NG-1) + 1 + NL_R + 1 + NL_O*R_FO
// The fused loop, the state machine that replaces the imperfect loop nest,
// the NFR-way unrolling of f_R and the II model follow the paper. The
// register stages (one per gather, per MLP layer, per aggregation), the
// Concat2 row order taken from the paper's overview drawing, and running
// graphs back to back when the next one is already buffered are this
// design's choices.
//
// Interface: g_valid/i_mat come from node_buffer; g_release frees the buffer
// bank after the last group of the graph has been gathered, so the next
// graph starts in the very next cycle when g_pending says it is buffered.
// Each O column leaves on o_valid/o_col, once per node; o_last marks node
// NO-1. The stream cannot be stalled.
module edge_node_unit
  import jedi_pkg::*;
#(
  parameter int unsigned NO     = 30,
  parameter int unsigned P      = 16,
  parameter int unsigned NFR    = 29,
  parameter int unsigned NL_R   = 1,
  parameter int unsigned DIMS_R [MAXL+1] = '{32, 8, 0, 0, 0, 0, 0, 0, 0},
  parameter int unsigned NL_O   = 3,
  parameter int unsigned DIMS_O [MAXL+1] = '{24, 48, 48, 48, 0, 0, 0, 0, 0},
  parameter int unsigned R_FO   = 1,
  parameter int unsigned R_PHI  = 1,
  parameter int unsigned NW_R   = mlp_nw(NL_R, DIMS_R),
  parameter int unsigned NW_O   = mlp_nw(NL_O, DIMS_O),
  parameter int unsigned DE     = DIMS_R[NL_R],
  parameter int unsigned DO     = DIMS_O[NL_O]
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  g_valid,
  input  logic  g_pending,
  input  data_t i_mat [NO][P],
  output logic  g_release,
  input  data_t w_fr [NW_R],
  input  data_t w_fo [NW_O],
  output logic  o_valid,
  output logic  o_last,
  output data_t o_col [DO]
);
  localparam int unsigned NG      = (NO - 1 + NFR - 1) / NFR;
  localparam int unsigned II_LOOP = imax(NG, imax(R_FO, R_PHI));
  localparam int unsigned NB      = $clog2(NO);
  localparam int unsigned GB      = (NG > 1) ? $clog2(NG) : 1;
  localparam int unsigned SB      = (II_LOOP > 1) ? $clog2(II_LOOP) : 1;
  localparam int unsigned DLY_I   = 1 + NL_R + 1;  // last issue -> Ebar column

  if (DIMS_R[0] != 2 * P) begin : g_bad_fr
    $error("edge_node_unit: f_R input width must be 2*P");
  end
  if (DIMS_O[0] != P + DE) begin : g_bad_fo
    $error("edge_node_unit: f_O input width must be P+DE");
  end

  // ---------------- loop controller (FSM of the fused loop) ----------------
  typedef enum logic {S_IDLE, S_RUN} run_e;
  run_e          run_q;
  logic [NB-1:0] node_q;
  logic [SB-1:0] st_q;
  logic          issue;
  logic          node_end;

  assign issue     = (run_q == S_RUN) && (32'(st_q) < NG);
  assign node_end  = (run_q == S_RUN) && (32'(st_q) == II_LOOP - 1);
  assign g_release = node_end && (32'(node_q) == NO - 1);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      run_q  <= S_IDLE;
      node_q <= '0;
      st_q   <= '0;
    end else begin
      unique case (run_q)
        S_IDLE: if (g_valid) begin
          run_q  <= S_RUN;
          node_q <= '0;
          st_q   <= '0;
        end
        S_RUN: if (node_end) begin
          st_q <= '0;
          if (32'(node_q) == NO - 1) begin
            node_q <= '0;
            if (!g_pending) run_q <= S_IDLE;   // else next graph starts now
          end else begin
            node_q <= node_q + 1'b1;
          end
        end else begin
          st_q <= st_q + 1'b1;
        end
        default: run_q <= S_IDLE;
      endcase
    end
  end

  // ---------------- code body A: edges ----------------
  logic  b_valid, b_first, b_last;
  logic  b_mask [NFR];
  data_t b_cols [NFR][2*P];

  edge_gather #(.NO(NO), .P(P), .NFR(NFR)) u_gather (
    .clk    (clk),
    .rst_n  (rst_n),
    .i_mat  (i_mat),
    .issue  (issue),
    .node   (node_q),
    .grp    (GB'(st_q)),
    .b_valid(b_valid),
    .b_first(b_first),
    .b_last (b_last),
    .b_mask (b_mask),
    .b_cols (b_cols)
  );

  data_t e_cols [NFR][DE];
  logic  e_lane_valid [NFR];

  for (genvar q = 0; q < NFR; q++) begin : g_fr
    mlp #(.NL(NL_R), .DIMS(DIMS_R), .REUSE(1), .LAST_RELU(1'b1)) u_fr (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (b_valid),
      .in_x     (b_cols[q]),
      .wts      (w_fr),
      .out_valid(e_lane_valid[q]),
      .out_y    (e_cols[q])
    );
  end

  // group tags travel beside f_R (NL_R register stages)
  logic tag_first [NL_R+1];
  logic tag_last  [NL_R+1];
  logic tag_mask  [NL_R+1][NFR];
  assign tag_first[0] = b_first;
  assign tag_last[0]  = b_last;
  always_comb tag_mask[0] = b_mask;
  always_ff @(posedge clk) begin
    for (int s = 1; s <= NL_R; s++) begin
      if (!rst_n) begin
        tag_first[s] <= 1'b0;
        tag_last[s]  <= 1'b0;
        for (int q = 0; q < NFR; q++) tag_mask[s][q] <= 1'b0;
      end else begin
        tag_first[s] <= tag_first[s-1];
        tag_last[s]  <= tag_last[s-1];
        tag_mask[s]  <= tag_mask[s-1];
      end
    end
  end

  logic  ebar_valid;
  data_t ebar [DE];

  mmm3_agg #(.NFR(NFR), .DE(DE)) u_mmm3 (
    .clk       (clk),
    .rst_n     (rst_n),
    .e_valid   (e_lane_valid[0]),
    .e_first   (tag_first[NL_R]),
    .e_last    (tag_last[NL_R]),
    .e_mask    (tag_mask[NL_R]),
    .e_cols    (e_cols),
    .ebar_valid(ebar_valid),
    .ebar      (ebar)
  );

  // ---------------- code body B: node ----------------
  // the node's own features, delayed to meet its Ebar column
  data_t i_dly [DLY_I+1][P];
  always_comb i_dly[0] = i_mat[node_q];
  always_ff @(posedge clk) begin
    for (int s = 1; s <= DLY_I; s++) begin
      if (!rst_n) for (int f = 0; f < P; f++) i_dly[s][f] <= '0;
      else        i_dly[s] <= i_dly[s-1];
    end
  end

  data_t c_col [P+DE];   // Concat2
  always_comb begin
    for (int j = 0; j < DE; j++) c_col[j] = ebar[j];
    for (int f = 0; f < P; f++)  c_col[DE + f] = i_dly[DLY_I][f];
  end

  mlp #(.NL(NL_O), .DIMS(DIMS_O), .REUSE(R_FO), .LAST_RELU(1'b1)) u_fo (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (ebar_valid),
    .in_x     (c_col),
    .wts      (w_fo),
    .out_valid(o_valid),
    .out_y    (o_col)
  );

  logic [NB-1:0] ocnt_q;
  assign o_last = o_valid && (32'(ocnt_q) == NO - 1);
  always_ff @(posedge clk) begin
    if (!rst_n)       ocnt_q <= '0;
    else if (o_valid) ocnt_q <= o_last ? '0 : ocnt_q + 1'b1;
  end

endmodule
