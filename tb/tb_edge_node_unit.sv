// tb_edge_node_unit: runs the fused Edge-Node unit on small graphs (5 nodes,
// 2 features, 2 f_R lanes so the last edge group is half empty, a two-layer
// f_R, f_O folded by 3 so the loop has an idle state) and compares every O
// column with the interaction network computed by matrix products. Graphs 0
// and 1 are offered back to back, graph 2 after a pause. Checked: values,
// o_last, the latency 1 + II_LOOP*(NO-1) + DP_LOOP from an idle start, and
// the spacing II_LOOP*NO of back-to-back graphs.
module tb_edge_node_unit;
  import jedi_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned NO = 5, P = 2, NFR = 2, NL_R = 2, NL_O = 1, R_FO = 3;
  localparam int unsigned DIMS_R [MAXL+1] = '{4, 3, 3, 0, 0, 0, 0, 0, 0};
  localparam int unsigned DIMS_O [MAXL+1] = '{5, 4, 0, 0, 0, 0, 0, 0, 0};
  localparam int unsigned NW_R = mlp_nw(NL_R, DIMS_R), NW_O = mlp_nw(NL_O, DIMS_O);
  localparam int unsigned NG = 2, II_LOOP = 3;
  localparam int unsigned DP_LOOP = (NG - 1) + 1 + NL_R + 1 + NL_O * R_FO;
  localparam int NGRAPH = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic  g_valid, g_pending, g_release, o_valid, o_last;
  data_t i_mat [NO][P];
  data_t w_fr [NW_R], w_fo [NW_O];
  data_t o_col [4];

  edge_node_unit #(
    .NO(NO), .P(P), .NFR(NFR), .NL_R(NL_R), .DIMS_R(DIMS_R), .NL_O(NL_O),
    .DIMS_O(DIMS_O), .R_FO(R_FO), .R_PHI(1)
  ) dut (
    .clk(clk), .rst_n(rst_n), .g_valid(g_valid), .g_pending(g_pending), .i_mat(i_mat),
    .g_release(g_release), .w_fr(w_fr), .w_fo(w_fo),
    .o_valid(o_valid), .o_last(o_last), .o_col(o_col));

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint im [NGRAPH][][];
  longint oref [NGRAPH][][];
  longint wr[], wo[];
  int dr[] = '{4, 3, 3};
  int dof[] = '{5, 4};
  int cur = 0, avail = 0, cyc = 0;
  int t_valid [NGRAPH], t_last [NGRAPH];
  int og = 0, on = 0;

  always @(posedge clk) cyc++;

  // stand-in for the node store
  always_comb begin
    g_valid   = (cur < avail);
    g_pending = (cur + 1 < avail);
    for (int n = 0; n < NO; n++)
      for (int f = 0; f < P; f++)
        i_mat[n][f] = (cur < NGRAPH) ? data_t'(im[cur][n][f]) : '0;
  end
  always @(posedge clk) if (rst_n && g_release) cur <= cur + 1;

  // output checker
  always @(negedge clk) if (rst_n && o_valid) begin
    checks++;
    if (o_last != (on == NO - 1)) begin failures++; $display("FAIL o_last at node %0d", on); end
    for (int j = 0; j < 4; j++) begin
      checks++;
      if (longint'(o_col[j]) != oref[og][on][j]) begin
        failures++;
        $display("FAIL graph %0d node %0d j %0d got %0d exp %0d", og, on, j, o_col[j], oref[og][on][j]);
      end
    end
    if (on == NO - 1) begin t_last[og] = cyc; og++; on = 0; end
    else on++;
  end

  initial begin
    wr = new[NW_R];
    wo = new[NW_O];
    foreach (wr[k]) begin wr[k] = rnd_q(-800, 800); w_fr[k] = data_t'(wr[k]); end
    foreach (wo[k]) begin wo[k] = rnd_q(-800, 800); w_fo[k] = data_t'(wo[k]); end
    for (int g = 0; g < NGRAPH; g++) begin
      im[g] = new[NO];
      foreach (im[g][n]) begin
        im[g][n] = new[P];
        foreach (im[g][n][f]) im[g][n][f] = rnd_q(-2000, 2000);
      end
      jedi_o_ref(im[g], P, wr, dr, wo, dof, oref[g]);
    end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    repeat (2) @(negedge clk);
    avail = 2; t_valid[0] = cyc;
    wait (og == 2);
    repeat (7) @(negedge clk);
    avail = 3; t_valid[2] = cyc;
    wait (og == 3);
    repeat (5) @(negedge clk);
    checks += 3;
    if (t_last[0] - t_valid[0] != 1 + II_LOOP * (NO - 1) + DP_LOOP) begin
      failures++;
      $display("FAIL latency %0d exp %0d", t_last[0] - t_valid[0], 1 + II_LOOP * (NO - 1) + DP_LOOP);
    end
    if (t_last[2] - t_valid[2] != 1 + II_LOOP * (NO - 1) + DP_LOOP) begin
      failures++;
      $display("FAIL latency g2 %0d", t_last[2] - t_valid[2]);
    end
    if (t_last[1] - t_last[0] != II_LOOP * NO) begin
      failures++;
      $display("FAIL II %0d exp %0d", t_last[1] - t_last[0], II_LOOP * NO);
    end
    $display("INFO latency=%0d II=%0d cycles", t_last[0] - t_valid[0], t_last[1] - t_last[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
