// tb_edge_gather: for every receiving node and edge group of a 6-node graph
// gathered 2 and 4 lanes at a time (the last group of the 4-lane instance is
// partly empty), compares each lane with the column of B = [I*Rr ; I*Rs]
// computed by matrix products, and checks the first/last/mask tags and the
// one-cycle latency.
module tb_edge_gather;
  import jedi_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned NO = 6, P = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_masked = 0;

  data_t i_mat [NO][P];
  logic  issue;
  logic [2:0] node;
  logic [1:0] grp2;
  logic       grp4;

  logic  v2, f2, l2, m2 [2];
  data_t c2 [2][2*P];
  logic  v4, f4, l4, m4 [4];
  data_t c4 [4][2*P];

  edge_gather #(.NO(NO), .P(P), .NFR(2)) dut2 (
    .clk(clk), .rst_n(rst_n), .i_mat(i_mat), .issue(issue), .node(node), .grp(grp2),
    .b_valid(v2), .b_first(f2), .b_last(l2), .b_mask(m2), .b_cols(c2));
  edge_gather #(.NO(NO), .P(P), .NFR(4)) dut4 (
    .clk(clk), .rst_n(rst_n), .i_mat(i_mat), .issue(issue), .node(node), .grp(grp4),
    .b_valid(v4), .b_first(f4), .b_last(l4), .b_mask(m4), .b_cols(c4));

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit rr[][], rs[][];

  function automatic longint bref(int e, int row);
    longint s = 0;
    for (int n = 0; n < NO; n++)
      if (row < P) s += rr[n][e] ? longint'(i_mat[n][row]) : 0;
      else         s += rs[n][e] ? longint'(i_mat[n][row - P]) : 0;
    return s;
  endfunction

  task automatic check_lanes(int nfr, int nd, int g, logic v, logic f, logic l,
                             logic m [], data_t c [][2*P]);
    int ng = (NO - 1 + nfr - 1) / nfr;
    checks += 3;
    if (!v) begin failures++; $display("FAIL valid nfr=%0d", nfr); end
    if (f != (g == 0)) begin failures++; $display("FAIL first nfr=%0d", nfr); end
    if (l != (g == ng - 1)) begin failures++; $display("FAIL last nfr=%0d", nfr); end
    for (int q = 0; q < nfr; q++) begin
      int k = g * nfr + q;
      checks++;
      if (m[q] != (k < NO - 1)) begin failures++; $display("FAIL mask nfr=%0d q=%0d", nfr, q); end
      if (k < NO - 1) begin
        for (int r = 0; r < 2 * P; r++) begin
          checks++;
          if (longint'(c[q][r]) != bref(nd * (NO - 1) + k, r)) begin
            failures++;
            $display("FAIL nfr=%0d node=%0d k=%0d row=%0d", nfr, nd, k, r);
          end
        end
      end else n_masked++;
    end
  endtask

  initial begin
    issue = 0; node = '0; grp2 = '0; grp4 = '0;
    adjacency(NO, rr, rs);
    foreach (i_mat[n, f]) i_mat[n][f] = data_t'($urandom);
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int nd = 0; nd < NO; nd++)
      for (int g = 0; g < 3; g++) begin
        issue = 1; node = 3'(nd); grp2 = 2'(g); grp4 = 1'(g % 2);
        @(negedge clk);
        issue = 0;
        check_lanes(2, nd, g, v2, f2, l2, m2, c2);
        if (g < 2) check_lanes(4, nd, g, v4, f4, l4, m4, c4);
        @(negedge clk);
        checks++;
        if (v2 || v4) begin failures++; $display("FAIL valid without issue"); end
      end
    checks++;
    if (n_masked == 0) begin failures++; $display("FAIL no masked lane seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
