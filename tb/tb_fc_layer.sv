// tb_fc_layer: checks fc_layer against the integer reference layer for a
// fully parallel instance (REUSE=1, ReLU) and a folded one (REUSE=3, linear,
// IN not a multiple of REUSE), including the REUSE-cycle latency and the
// saturation of large sums.
module tb_fc_layer;
  import jedi_pkg::*;
  import tb_ref_pkg::*;

  localparam int IA = 5, OA = 3;
  localparam int IB = 7, OB = 4, RB = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  data_t xa [IA], wa [OA][IA], ba [OA], ya [OA];
  data_t xb [IB], wb [OB][IB], bb [OB], yb [OB];
  logic  va, vb, oa, ob;

  fc_layer #(.IN(IA), .OUT(OA), .REUSE(1), .RELU(1'b1)) dut_a (
    .clk(clk), .rst_n(rst_n), .in_valid(va), .in_x(xa), .w(wa), .b(ba),
    .out_valid(oa), .out_y(ya));
  fc_layer #(.IN(IB), .OUT(OB), .REUSE(RB), .RELU(1'b0)) dut_b (
    .clk(clk), .rst_n(rst_n), .in_valid(vb), .in_x(xb), .w(wb), .b(bb),
    .out_valid(ob), .out_y(yb));

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_a(input bit big);
    longint x[], w[], y[];
    x = new[IA];
    w = new[OA * IA + OA];
    foreach (w[k]) w[k] = big ? rnd_q(-2000, 2000) : rnd_q(-500, 500);
    foreach (x[k]) x[k] = big ? rnd_q(-2040, 2040) : rnd_q(-2000, 2000);
    if (big) foreach (w[k]) w[k] = (k < OA * IA) ? 32'sd8388607 * ((k % 2) ? 1 : -1) : w[k];
    if (big) foreach (x[k]) x[k] = 32'sd8388607 * ((k % 2) ? 1 : -1);
    for (int o = 0; o < OA; o++) begin
      for (int i = 0; i < IA; i++) wa[o][i] = data_t'(w[o * IA + i]);
      ba[o] = data_t'(w[OA * IA + o]);
    end
    for (int i = 0; i < IA; i++) xa[i] = data_t'(x[i]);
    layer_ref(x, w, 0, IA, OA, 1'b1, y);
    @(negedge clk) va = 1;
    @(negedge clk) va = 0;
    foreach (xa[i]) xa[i] = '0;    // input need only be valid for one cycle
    checks++;
    if (!oa) begin failures++; $display("FAIL A: no output after 1 cycle"); end
    for (int o = 0; o < OA; o++) begin
      checks++;
      if (longint'(ya[o]) != y[o]) begin
        failures++;
        $display("FAIL A o=%0d got %0d exp %0d", o, ya[o], y[o]);
      end
    end
  endtask

  task automatic run_b();
    longint x[], w[], y[];
    int lat;
    x = new[IB];
    w = new[OB * IB + OB];
    foreach (w[k]) w[k] = rnd_q(-700, 700);
    foreach (x[k]) x[k] = rnd_q(-3000, 3000);
    for (int o = 0; o < OB; o++) begin
      for (int i = 0; i < IB; i++) wb[o][i] = data_t'(w[o * IB + i]);
      bb[o] = data_t'(w[OB * IB + o]);
    end
    for (int i = 0; i < IB; i++) xb[i] = data_t'(x[i]);
    layer_ref(x, w, 0, IB, OB, 1'b0, y);
    @(negedge clk) vb = 1;
    @(negedge clk) vb = 0;
    foreach (xb[i]) xb[i] = data_t'($urandom);
    lat = 1;
    while (!ob && lat < 20) begin @(negedge clk); lat++; end
    checks++;
    if (lat != RB) begin failures++; $display("FAIL B latency %0d exp %0d", lat, RB); end
    for (int o = 0; o < OB; o++) begin
      checks++;
      if (longint'(yb[o]) != y[o]) begin
        failures++;
        $display("FAIL B o=%0d got %0d exp %0d", o, yb[o], y[o]);
      end
    end
  endtask

  initial begin
    va = 0; vb = 0;
    foreach (xa[i]) xa[i] = '0;
    foreach (xb[i]) xb[i] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int t = 0; t < 40; t++) run_a(1'b0);
    for (int t = 0; t < 3; t++) run_a(1'b1);
    for (int t = 0; t < 40; t++) run_b();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
