// tb_ll_gnn_top: end-to-end test of the accelerator at reduced size. Loads
// random coefficients through the cfg port, streams 8 jets (6 particles, 3
// features) and compares the class scores with the interaction network
// computed by matrix products. The sizes make every mechanism happen:
//   - input held off while both node-store banks are full (back-pressure),
//   - a half-empty last edge group (5 edges per node, 2 f_R lanes),
//   - idle states of the loop FSM (f_O folded by 4 > 3 edge groups),
//   - a jet starting right behind the previous one, and one from idle,
//   - folded f_O and phi_O layers (reuse factors 4 and 2).
// Each is counted and must occur. Latency from the last particle of an idle
// start to the scores, and the interval between back-to-back jets, are
// checked against the schedule of edge_node_unit.
module tb_ll_gnn_top;
  import jedi_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned NO = 6, P = 3, NFR = 2, NL_R = 2, NL_O = 2, NL_P = 2;
  localparam int unsigned R_FO = 4, R_PHI = 2;
  localparam int unsigned DIMS_R [MAXL+1] = '{6, 5, 4, 0, 0, 0, 0, 0, 0};
  localparam int unsigned DIMS_O [MAXL+1] = '{7, 6, 5, 0, 0, 0, 0, 0, 0};
  localparam int unsigned DIMS_P [MAXL+1] = '{5, 4, 5, 0, 0, 0, 0, 0, 0};
  localparam int unsigned NG = 3, II_LOOP = 4;
  localparam int unsigned DP_LOOP = (NG - 1) + 1 + NL_R + 1 + NL_O * R_FO;
  localparam int unsigned LAT = 3 + II_LOOP * (NO - 1) + DP_LOOP + 2 + NL_P * R_PHI;
  localparam int NJ = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        s_valid, s_ready, cfg_we, y_valid;
  data_t       s_col [P];
  logic [1:0]  cfg_sel;
  logic [15:0] cfg_addr;
  data_t       cfg_data;
  data_t       y_scores [5];

  ll_gnn_top #(
    .NO(NO), .P(P), .NFR(NFR), .NL_R(NL_R), .DIMS_R(DIMS_R), .NL_O(NL_O), .DIMS_O(DIMS_O),
    .NL_P(NL_P), .DIMS_P(DIMS_P), .R_FO(R_FO), .R_PHI(R_PHI)
  ) dut (
    .clk(clk), .rst_n(rst_n), .s_valid(s_valid), .s_ready(s_ready), .s_col(s_col),
    .cfg_we(cfg_we), .cfg_sel(cfg_sel), .cfg_addr(cfg_addr), .cfg_data(cfg_data),
    .y_valid(y_valid), .y_scores(y_scores));

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int dr[] = '{6, 5, 4};
  int dof[] = '{7, 6, 5};
  int dp[] = '{5, 4, 5};
  longint wr[], wo[], wp[];
  longint yref [NJ][];
  longint im [NJ][][];
  int cyc = 0, nout = 0;
  int t_in_last [NJ], t_out [NJ];
  bit idle_start [NJ];

  // mechanism counters
  int n_backpressure = 0, n_partial = 0, n_idle_state = 0, n_chain = 0, n_restart = 0;
  int n_fold_fo = 0, n_fold_phi = 0;

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (s_valid && !s_ready) n_backpressure++;
    if (dut.u_en.b_valid && !dut.u_en.b_mask[NFR-1]) n_partial++;
    if (int'(dut.u_en.run_q) == 1 && !dut.u_en.issue) n_idle_state++;
    if (dut.u_en.g_release && dut.u_en.g_pending) n_chain++;
    if (int'(dut.u_en.run_q) == 0 && dut.g_valid) n_restart++;
    if (dut.u_en.u_fo.g_layer[0].u_fc.run_q) n_fold_fo++;
    if (dut.u_head.u_phi.g_layer[0].u_fc.run_q) n_fold_phi++;
  end

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
    wr = new[mlp_size(dr)]; wo = new[mlp_size(dof)]; wp = new[mlp_size(dp)];
    foreach (wr[k]) wr[k] = rnd_q(-700, 700);
    foreach (wo[k]) wo[k] = rnd_q(-700, 700);
    foreach (wp[k]) wp[k] = rnd_q(-700, 700);
    for (int j = 0; j < NJ; j++) begin
      longint o[][];
      im[j] = new[NO];
      foreach (im[j][n]) begin
        im[j][n] = new[P];
        foreach (im[j][n][f]) im[j][n][f] = rnd_q(-2500, 2500);
      end
      jedi_o_ref(im[j], P, wr, dr, wo, dof, o);
      head_ref(o, wp, dp, yref[j]);
    end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    load(0, wr); load(1, wo); load(2, wp);
    for (int j = 0; j < NJ; j++) begin
      idle_start[j] = (j == 0) || (j == 5);
      if (j == 5) wait (nout == 5);             // let the pipeline drain once
      for (int n = 0; n < NO; n++) begin
        @(negedge clk);
        if (j >= 6) while ($urandom_range(3, 0) == 0) begin s_valid = 0; @(negedge clk); end
        s_valid = 1;
        s_col = '{data_t'(im[j][n][0]), data_t'(im[j][n][1]), data_t'(im[j][n][2])};
        @(posedge clk);
        while (!s_ready) @(posedge clk);
        if (n == NO - 1) t_in_last[j] = cyc;
      end
      @(negedge clk) s_valid = 0;
    end
    wait (nout == NJ);
    repeat (5) @(negedge clk);
    foreach (idle_start[j]) if (idle_start[j]) begin
      checks++;
      if (t_out[j] - t_in_last[j] != LAT) begin
        failures++;
        $display("FAIL jet %0d latency %0d exp %0d", j, t_out[j] - t_in_last[j], LAT);
      end
    end
    for (int j = 1; j < 5; j++) begin
      checks++;
      if (t_out[j] - t_out[j-1] != II_LOOP * NO) begin
        failures++;
        $display("FAIL interval %0d->%0d %0d exp %0d", j - 1, j, t_out[j] - t_out[j-1], II_LOOP * NO);
      end
    end
    $display("INFO latency=%0d cycles, interval=%0d cycles", t_out[0] - t_in_last[0], t_out[2] - t_out[1]);
    $display("INFO backpressure=%0d partial_group=%0d idle_state=%0d chained_start=%0d idle_start=%0d fold_fO=%0d fold_phiO=%0d",
             n_backpressure, n_partial, n_idle_state, n_chain, n_restart, n_fold_fo, n_fold_phi);
    checks += 7;
    if (n_backpressure == 0) begin failures++; $display("FAIL no back-pressure"); end
    if (n_partial == 0)      begin failures++; $display("FAIL no partial group"); end
    if (n_idle_state == 0)   begin failures++; $display("FAIL no idle FSM state"); end
    if (n_chain == 0)        begin failures++; $display("FAIL no chained start"); end
    if (n_restart == 0)      begin failures++; $display("FAIL no start from idle"); end
    if (n_fold_fo == 0)      begin failures++; $display("FAIL f_O never folded"); end
    if (n_fold_phi == 0)     begin failures++; $display("FAIL phi_O never folded"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
