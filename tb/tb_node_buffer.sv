// tb_node_buffer: streams 12 random graphs into the double-buffered node
// store with random gaps while a slow consumer checks each full bank against
// the graph that filled it, checks g_pending, and releases it. The input must
// be held off (s_ready low) while both banks are full.
module tb_node_buffer;
  import jedi_pkg::*;
  localparam int unsigned NO = 4, P = 3, NGRAPH = 12;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic  s_valid, s_ready, g_valid, g_pending, g_release;
  data_t s_col [P];
  data_t i_mat [NO][P];

  node_buffer #(.NO(NO), .P(P)) dut (
    .clk(clk), .rst_n(rst_n), .s_valid(s_valid), .s_ready(s_ready), .s_col(s_col),
    .g_valid(g_valid), .g_pending(g_pending), .i_mat(i_mat), .g_release(g_release));

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  data_t graphs [NGRAPH][NO][P];
  int    n_sent = 0;     // graphs fully accepted
  int    n_stall = 0;

  // producer
  initial begin
    s_valid = 0;
    foreach (s_col[f]) s_col[f] = '0;
    foreach (graphs[g, n, f]) graphs[g][n][f] = data_t'($urandom);
    wait (rst_n);
    for (int g = 0; g < NGRAPH; g++)
      for (int n = 0; n < NO; n++) begin
        @(negedge clk);
        while ($urandom_range(3, 0) == 0) begin s_valid = 0; @(negedge clk); end
        s_valid = 1;
        s_col = graphs[g][n];
        @(posedge clk);
        while (!s_ready) begin n_stall++; @(posedge clk); end
        if (n == NO - 1) n_sent++;
      end
    @(negedge clk) s_valid = 0;
  end

  // consumer
  initial begin
    g_release = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int g = 0; g < NGRAPH; g++) begin
      @(negedge clk);
      while (!g_valid) @(negedge clk);
      repeat ($urandom_range(12, 2)) @(negedge clk);
      for (int n = 0; n < NO; n++)
        for (int f = 0; f < P; f++) begin
          checks++;
          if (i_mat[n][f] !== graphs[g][n][f]) begin
            failures++;
            $display("FAIL graph %0d node %0d feat %0d", g, n, f);
          end
        end
      checks++;
      if (g_pending != (n_sent > g + 1)) begin
        failures++;
        $display("FAIL g_pending=%0d sent=%0d g=%0d", g_pending, n_sent, g);
      end
      g_release = 1;
      @(negedge clk) g_release = 0;
    end
    checks++;
    if (n_stall == 0) begin failures++; $display("FAIL input never held off"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
