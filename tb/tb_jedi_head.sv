// tb_jedi_head: streams the O columns of several graphs (3 to 7 nodes, with
// and without gaps, one graph directly after another) into the head and
// checks the class scores against sum-then-phi_O, and the 1 + NL_P*R_PHI
// cycle latency from the last column.
module tb_jedi_head;
  import jedi_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned NL_P = 2, R_PHI = 2;
  localparam int unsigned DIMS_P [MAXL+1] = '{4, 6, 3, 0, 0, 0, 0, 0, 0};
  localparam int unsigned NW_P = mlp_nw(NL_P, DIMS_P);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic  o_valid, o_last, y_valid;
  data_t o_col [4], w_phi [NW_P], y [3];

  jedi_head #(.NL_P(NL_P), .DIMS_P(DIMS_P), .R_PHI(R_PHI)) dut (
    .clk(clk), .rst_n(rst_n), .o_valid(o_valid), .o_last(o_last), .o_col(o_col),
    .w_phi(w_phi), .y_valid(y_valid), .y(y));

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint wp[];
  int dp[] = '{4, 6, 3};
  longint expq[$][];
  int tq[$];
  int cyc = 0;
  always @(posedge clk) cyc++;

  always @(negedge clk) if (rst_n && y_valid) begin
    longint e[];
    int t0;
    e = expq.pop_front();
    t0 = tq.pop_front();
    checks++;
    if (cyc - t0 != 1 + NL_P * R_PHI) begin failures++; $display("FAIL latency %0d", cyc - t0); end
    for (int c = 0; c < 3; c++) begin
      checks++;
      if (longint'(y[c]) != e[c]) begin failures++; $display("FAIL class %0d got %0d exp %0d", c, y[c], e[c]); end
    end
  end

  initial begin
    o_valid = 0; o_last = 0;
    foreach (o_col[j]) o_col[j] = '0;
    wp = new[NW_P];
    foreach (wp[k]) begin wp[k] = rnd_q(-900, 900); w_phi[k] = data_t'(wp[k]); end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int g = 0; g < 30; g++) begin
      automatic int no = $urandom_range(7, 3);
      longint o[][], yv[];
      o = new[no];
      for (int n = 0; n < no; n++) begin
        o[n] = new[4];
        foreach (o[n][j]) o[n][j] = (g % 7 == 6) ? longint'(24'sh600000) : rnd_q(0, 3000);
      end
      head_ref(o, wp, dp, yv);
      expq.push_back(yv);
      for (int n = 0; n < no; n++) begin
        o_valid = 1; o_last = (n == no - 1);
        foreach (o_col[j]) o_col[j] = data_t'(o[n][j]);
        if (n == no - 1) tq.push_back(cyc);
        @(negedge clk);
        o_valid = 0; o_last = 0;
        foreach (o_col[j]) o_col[j] = data_t'($urandom);
        if (g % 2 == 1) repeat ($urandom_range(2, 0)) @(negedge clk);
      end
      // graphs follow each other no faster than phi_O can fold
      repeat (R_PHI) @(negedge clk);
    end
    repeat (10) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL missing scores"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
