// tb_ll_gnn_sized: end-to-end check of the accelerator at one of the
// published JEDI-net sizes, chosen by parameters. It loads random
// coefficients, streams NJ jets back to back at one particle per cycle,
// compares the five scores of every jet with the interaction network
// computed by explicit matrix products (tb_ref_pkg), and checks two cycle
// counts: the latency of the first jet from its last accepted particle,
//   3 + NG*(NO-1) + (NG-1) + 1 + NL_R + 1 + NL_O + 2 + NL_P,
// and the interval between jets, NG*NO with NG = ceil((NO-1)/NFR). Reuse
// factors stay at 1, so the edge groups set the interval. It is not run on
// its own: the small wrappers tb_ll_gnn_j3, tb_ll_gnn_j5, tb_ll_gnn_u4 and
// tb_ll_gnn_u5 pick the sizes, watch the clock and report. It raises done
// when all jets are checked and holds its counts on checks and failures.
// Coefficient ranges (in LSBs of Q12.12) are parameters so that wide layers
// stay inside the number range.
module tb_ll_gnn_sized #(
  parameter int unsigned NO   = 30,
  parameter int unsigned P    = 16,
  parameter int unsigned NFR  = 29,
  parameter int unsigned NL_R = 1,
  parameter int unsigned DIMS_R [jedi_pkg::MAXL+1] = '{32, 8, 0, 0, 0, 0, 0, 0, 0},
  parameter int unsigned NL_O = 3,
  parameter int unsigned DIMS_O [jedi_pkg::MAXL+1] = '{24, 48, 48, 48, 0, 0, 0, 0, 0},
  parameter int unsigned NL_P = 2,
  parameter int unsigned DIMS_P [jedi_pkg::MAXL+1] = '{48, 48, 5, 0, 0, 0, 0, 0, 0},
  parameter int          WR_RANGE = 250,
  parameter int          WO_RANGE = 150,
  parameter int          WP_RANGE = 150,
  parameter int          NJ = 3
) (
  output logic done,
  output int   checks,
  output int   failures
);
  import jedi_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned NG  = (NO - 1 + NFR - 1) / NFR;
  localparam int unsigned LAT = 3 + NG * (NO - 1) + (NG - 1) + 1 + NL_R + 1 + NL_O + 2 + NL_P;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  initial begin done = 0; checks = 0; failures = 0; end

  logic        s_valid, s_ready, cfg_we, y_valid;
  data_t       s_col [P];
  logic [1:0]  cfg_sel;
  logic [15:0] cfg_addr;
  data_t       cfg_data;
  data_t       y_scores [5];

  ll_gnn_top #(.NO(NO), .P(P), .NFR(NFR), .NL_R(NL_R), .DIMS_R(DIMS_R),
               .NL_O(NL_O), .DIMS_O(DIMS_O), .NL_P(NL_P), .DIMS_P(DIMS_P)) dut (
    .clk(clk), .rst_n(rst_n), .s_valid(s_valid), .s_ready(s_ready), .s_col(s_col),
    .cfg_we(cfg_we), .cfg_sel(cfg_sel), .cfg_addr(cfg_addr), .cfg_data(cfg_data),
    .y_valid(y_valid), .y_scores(y_scores));

  int dr[], dof[], dp[];
  longint wr[], wo[], wp[];
  longint yref [NJ][];
  longint im [NJ][][];
  int cyc = 0, nout = 0;
  int t_in_last [NJ], t_out [NJ];

  always @(posedge clk) if (rst_n) cyc++;

  always @(negedge clk) if (rst_n && y_valid) begin
    t_out[nout] = cyc;
    for (int c = 0; c < 5; c++) begin
      checks++;
      if (longint'(y_scores[c]) != yref[nout][c]) begin
        failures++;
        $display("FAIL jet %0d class %0d got %0d exp %0d", nout, c, y_scores[c], yref[nout][c]);
      end
    end
    nout++;
  end

  task automatic load(input int sel, input longint w[]);
    foreach (w[k]) begin
      @(negedge clk);
      cfg_we = 1; cfg_sel = 2'(sel); cfg_addr = 16'(k); cfg_data = data_t'(w[k]);
    end
    @(negedge clk) cfg_we = 0;
  endtask

  initial begin
    s_valid = 0; cfg_we = 0; cfg_sel = '0; cfg_addr = '0; cfg_data = '0;
    foreach (s_col[f]) s_col[f] = '0;
    dr = new[NL_R + 1]; dof = new[NL_O + 1]; dp = new[NL_P + 1];
    foreach (dr[l])  dr[l]  = int'(DIMS_R[l]);
    foreach (dof[l]) dof[l] = int'(DIMS_O[l]);
    foreach (dp[l])  dp[l]  = int'(DIMS_P[l]);
    wr = new[mlp_size(dr)]; wo = new[mlp_size(dof)]; wp = new[mlp_size(dp)];
    foreach (wr[k]) wr[k] = rnd_q(-WR_RANGE, WR_RANGE);
    foreach (wo[k]) wo[k] = rnd_q(-WO_RANGE, WO_RANGE);
    foreach (wp[k]) wp[k] = rnd_q(-WP_RANGE, WP_RANGE);
    for (int j = 0; j < NJ; j++) begin
      longint o[][];
      im[j] = new[NO];
      foreach (im[j][n]) begin
        im[j][n] = new[P];
        foreach (im[j][n][f]) im[j][n][f] = rnd_q(-2000, 2000);
      end
      jedi_o_ref(im[j], P, wr, dr, wo, dof, o);
      head_ref(o, wp, dp, yref[j]);
    end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    load(0, wr); load(1, wo); load(2, wp);
    for (int j = 0; j < NJ; j++)
      for (int n = 0; n < NO; n++) begin
        @(negedge clk);
        s_valid = 1;
        foreach (s_col[f]) s_col[f] = data_t'(im[j][n][f]);
        @(posedge clk);
        while (!s_ready) @(posedge clk);
        if (n == NO - 1) t_in_last[j] = cyc;
      end
    @(negedge clk) s_valid = 0;
    wait (nout == NJ);
    repeat (5) @(negedge clk);
    checks++;
    if (t_out[0] - t_in_last[0] != LAT) begin
      failures++;
      $display("FAIL latency %0d exp %0d", t_out[0] - t_in_last[0], LAT);
    end
    for (int j = 1; j < NJ; j++) begin
      checks++;
      if (t_out[j] - t_out[j-1] != NG * NO) begin
        failures++;
        $display("FAIL interval %0d exp %0d", t_out[j] - t_out[j-1], NG * NO);
      end
    end
    $display("INFO NO=%0d NFR=%0d latency=%0d cycles, interval=%0d cycles",
             NO, NFR, t_out[0] - t_in_last[0], t_out[1] - t_out[0]);
    done = 1;
  end
endmodule
