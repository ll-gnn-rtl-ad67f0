// tb_ll_gnn_full: the accelerator at its default size (30 particles of 16
// features, 29 f_R lanes, f_O 24-48-48-48, phi_O 48-48-5). Loads random
// coefficients, streams three jets back to back and compares the scores with
// the interaction network computed by matrix products; checks the latency of
// the first jet (last particle in to scores out) and that later jets finish
// every 30 cycles, one node per cycle.
module tb_ll_gnn_full;
  import jedi_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned NO = 30, P = 16;
  localparam int unsigned LAT = 3 + 1 * (NO - 1) + (0 + 1 + 1 + 1 + 3) + 2 + 2;
  localparam int NJ = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        s_valid, s_ready, cfg_we, y_valid;
  data_t       s_col [P];
  logic [1:0]  cfg_sel;
  logic [15:0] cfg_addr;
  data_t       cfg_data;
  data_t       y_scores [5];

  ll_gnn_top dut (
    .clk(clk), .rst_n(rst_n), .s_valid(s_valid), .s_ready(s_ready), .s_col(s_col),
    .cfg_we(cfg_we), .cfg_sel(cfg_sel), .cfg_addr(cfg_addr), .cfg_data(cfg_data),
    .y_valid(y_valid), .y_scores(y_scores));

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int dr[] = '{32, 8};
  int dof[] = '{24, 48, 48, 48};
  int dp[] = '{48, 48, 5};
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
    wr = new[mlp_size(dr)]; wo = new[mlp_size(dof)]; wp = new[mlp_size(dp)];
    // small coefficients keep activations in range for a 48-wide layer
    foreach (wr[k]) wr[k] = rnd_q(-250, 250);
    foreach (wo[k]) wo[k] = rnd_q(-150, 150);
    foreach (wp[k]) wp[k] = rnd_q(-150, 150);
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
      if (t_out[j] - t_out[j-1] != NO) begin
        failures++;
        $display("FAIL interval %0d exp %0d", t_out[j] - t_out[j-1], NO);
      end
    end
    $display("INFO latency=%0d cycles, interval=%0d cycles", t_out[0] - t_in_last[0], t_out[1] - t_out[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
