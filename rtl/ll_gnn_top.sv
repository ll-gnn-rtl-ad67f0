// ll_gnn_top: low-latency JEDI-net accelerator for jet tagging, the fused
// architecture: input channel -> Edge-Node unit -> channel -> MLP head.
//
// A jet is a graph of NO particles with P features each, fully connected by
// NO*(NO-1) directed edges. The particles stream in on s_valid/s_ready/s_col,
// one feature column per handshake, NO per jet, through the input channel
// into a node store (a ring of banks). The Edge-Node unit then processes the
// jet node by node (see edge_node_unit for the schedule): edge features by
// index arithmetic, the edge MLP f_R in NFR parallel copies, aggregation into
// the receiving node, concatenation with the node's features and the node MLP
// f_O. Its O columns cross a second channel into the head, which sums them
// and applies phi_O, giving NCLS class scores on y_valid/y_scores.
//
// Defaults are the JEDI-net-30p design point with the lowest latency: NO=30,
// P=16, NFR=29 copies of a one-layer f_R of width 8, f_O with three layers of
// 48, reuse factors 1, so one node starts every cycle (II_LOOP=1), a jet every
// 30 cycles. Sizes the paper leaves open (D_e, D_o, the head's hidden width)
// are this design's assumptions, listed in the accompanying documentation.
//
// Coefficients are written before use through the cfg_* port: cfg_sel picks
// the store (0 = f_R, 1 = f_O, 2 = phi_O), cfg_addr the word (layout in
// mlp), cfg_data the Q12.12 value. cfg_addr is 16 bits wide so that larger
// MLPs fit; at the default sizes its upper bits are not needed, and lint
// reports them as unused. Reset is synchronous and active low.
module ll_gnn_top
  import jedi_pkg::*;
#(
  parameter int unsigned NO     = 30,
  parameter int unsigned P      = 16,
  parameter int unsigned NFR    = 29,
  parameter int unsigned NL_R   = 1,
  parameter int unsigned DIMS_R [MAXL+1] = '{32, 8, 0, 0, 0, 0, 0, 0, 0},
  parameter int unsigned NL_O   = 3,
  parameter int unsigned DIMS_O [MAXL+1] = '{24, 48, 48, 48, 0, 0, 0, 0, 0},
  parameter int unsigned NL_P   = 2,
  parameter int unsigned DIMS_P [MAXL+1] = '{48, 48, 5, 0, 0, 0, 0, 0, 0},
  parameter int unsigned R_FO   = 1,
  parameter int unsigned R_PHI  = 1,
  parameter int unsigned NCLS   = DIMS_P[NL_P]
) (
  input  logic        clk,
  input  logic        rst_n,
  // particle stream
  input  logic        s_valid,
  output logic        s_ready,
  input  data_t       s_col [P],
  // coefficient load
  input  logic        cfg_we,
  input  logic [1:0]  cfg_sel,
  input  logic [15:0] cfg_addr,
  input  data_t       cfg_data,
  // class scores
  output logic        y_valid,
  output data_t       y_scores [NCLS]
);
  localparam int unsigned NW_R = mlp_nw(NL_R, DIMS_R);
  localparam int unsigned NW_O = mlp_nw(NL_O, DIMS_O);
  localparam int unsigned NW_P = mlp_nw(NL_P, DIMS_P);
  localparam int unsigned DO   = DIMS_O[NL_O];
  localparam int unsigned AB_R = $clog2(NW_R);
  localparam int unsigned AB_O = $clog2(NW_O);
  localparam int unsigned AB_P = $clog2(NW_P);

  // ---------------- coefficient stores ----------------
  data_t w_fr [NW_R];
  data_t w_fo [NW_O];
  data_t w_phi [NW_P];

  weight_store #(.N(NW_R)) u_w_fr (
    .clk(clk), .rst_n(rst_n), .we(cfg_we && cfg_sel == 2'd0),
    .addr(cfg_addr[AB_R-1:0]), .wdata(cfg_data), .q(w_fr));
  weight_store #(.N(NW_O)) u_w_fo (
    .clk(clk), .rst_n(rst_n), .we(cfg_we && cfg_sel == 2'd1),
    .addr(cfg_addr[AB_O-1:0]), .wdata(cfg_data), .q(w_fo));
  weight_store #(.N(NW_P)) u_w_phi (
    .clk(clk), .rst_n(rst_n), .we(cfg_we && cfg_sel == 2'd2),
    .addr(cfg_addr[AB_P-1:0]), .wdata(cfg_data), .q(w_phi));

  // ---------------- input channel ----------------
  logic [P*DW-1:0] s_flat, c_flat;
  logic            c_valid, c_ready;
  data_t           c_col [P];

  always_comb
    for (int f = 0; f < P; f++) begin
      s_flat[f*DW +: DW] = s_col[f];
      c_col[f]           = c_flat[f*DW +: DW];
    end

  stream_fifo #(.W(P*DW), .DEPTH(2)) u_in_ch (
    .clk(clk), .rst_n(rst_n),
    .s_valid(s_valid), .s_ready(s_ready), .s_data(s_flat),
    .m_valid(c_valid), .m_ready(c_ready), .m_data(c_flat));

  // ---------------- node store ----------------
  logic  g_valid, g_pending, g_release;
  data_t i_mat [NO][P];

  node_buffer #(.NO(NO), .P(P)) u_nodes (
    .clk(clk), .rst_n(rst_n),
    .s_valid(c_valid), .s_ready(c_ready), .s_col(c_col),
    .g_valid(g_valid), .g_pending(g_pending), .i_mat(i_mat),
    .g_release(g_release));

  // ---------------- Edge-Node unit ----------------
  logic  o_valid, o_last;
  data_t o_col [DO];

  edge_node_unit #(
    .NO(NO), .P(P), .NFR(NFR),
    .NL_R(NL_R), .DIMS_R(DIMS_R), .NL_O(NL_O), .DIMS_O(DIMS_O),
    .R_FO(R_FO), .R_PHI(R_PHI)
  ) u_en (
    .clk(clk), .rst_n(rst_n),
    .g_valid(g_valid), .g_pending(g_pending), .i_mat(i_mat),
    .g_release(g_release),
    .w_fr(w_fr), .w_fo(w_fo),
    .o_valid(o_valid), .o_last(o_last), .o_col(o_col));

  // ---------------- channel to the head ----------------
  logic [DO*DW:0] o_flat, h_flat;
  logic           o_ready, h_valid, h_last;
  data_t          h_col [DO];

  always_comb begin
    o_flat[DO*DW] = o_last;
    for (int j = 0; j < DO; j++) begin
      o_flat[j*DW +: DW] = o_col[j];
      h_col[j]           = h_flat[j*DW +: DW];
    end
  end
  assign h_last = h_flat[DO*DW];

  stream_fifo #(.W(DO*DW+1), .DEPTH(2)) u_mid_ch (
    .clk(clk), .rst_n(rst_n),
    .s_valid(o_valid), .s_ready(o_ready), .s_data(o_flat),
    .m_valid(h_valid), .m_ready(1'b1), .m_data(h_flat));

  // the head takes a column every cycle, so the channel can never fill
  always_ff @(posedge clk)
    if (rst_n) a_mid_room: assert (!o_valid || o_ready)
      else $error("ll_gnn_top: O column lost");

  // ---------------- MLP head ----------------
  jedi_head #(.NL_P(NL_P), .DIMS_P(DIMS_P), .R_PHI(R_PHI)) u_head (
    .clk(clk), .rst_n(rst_n),
    .o_valid(h_valid), .o_last(h_last && h_valid), .o_col(h_col),
    .w_phi(w_phi),
    .y_valid(y_valid), .y(y_scores));

endmodule
