// tb_mlp: checks a three-layer mlp (ReLU, ReLU, linear) with reuse factor 2
// against the reference MLP, its NL*REUSE-cycle latency, and that a new
// vector every REUSE cycles is accepted.
module tb_mlp;
  import jedi_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned NL = 3, R = 2;
  localparam int unsigned DIMS [MAXL+1] = '{6, 5, 4, 3, 0, 0, 0, 0, 0};
  localparam int unsigned NW = mlp_nw(NL, DIMS);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic  vin, vout;
  data_t x [6], y [3], wts [NW];

  mlp #(.NL(NL), .DIMS(DIMS), .REUSE(R), .LAST_RELU(1'b0)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(vin), .in_x(x), .wts(wts),
    .out_valid(vout), .out_y(y));

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint w[];
  int dims[] = '{6, 5, 4, 3};
  longint expq[$][];
  int     tin[$];
  int     cyc = 0;
  always @(posedge clk) cyc++;

  // scoreboard
  always @(negedge clk) if (rst_n && vout) begin
    longint e[];
    int t0;
    e = expq.pop_front();
    t0 = tin.pop_front();
    checks++;
    if (cyc - t0 != NL * R) begin
      failures++;
      $display("FAIL latency %0d exp %0d", cyc - t0, NL * R);
    end
    for (int o = 0; o < 3; o++) begin
      checks++;
      if (longint'(y[o]) != e[o]) begin
        failures++;
        $display("FAIL o=%0d got %0d exp %0d", o, y[o], e[o]);
      end
    end
  end

  initial begin
    vin = 0;
    foreach (x[i]) x[i] = '0;
    w = new[NW];
    foreach (w[k]) begin
      w[k] = rnd_q(-600, 600);
      wts[k] = data_t'(w[k]);
    end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      longint xv[], yv[];
      xv = new[6];
      foreach (xv[i]) begin xv[i] = rnd_q(-3000, 3000); x[i] = data_t'(xv[i]); end
      mlp_ref(xv, w, dims, 1'b0, yv);
      expq.push_back(yv);
      vin = 1;
      tin.push_back(cyc);
      @(negedge clk) vin = 0;
      foreach (x[i]) x[i] = data_t'($urandom);
      repeat (R - 1 + (t % 3)) @(negedge clk);
    end
    repeat (NL * R + 2) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d outputs missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
