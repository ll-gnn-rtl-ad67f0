// tb_weight_store: writes random words at random addresses (some beyond the
// store, which must be ignored) and checks every word against a shadow copy,
// including the all-zero state after reset.
module tb_weight_store;
  import jedi_pkg::*;
  localparam int unsigned N = 37;
  localparam int unsigned AB = 6;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic          we;
  logic [AB-1:0] addr;
  data_t         wdata;
  data_t         q [N];
  data_t         shadow [N];

  weight_store #(.N(N), .AB(AB)) dut (
    .clk(clk), .rst_n(rst_n), .we(we), .addr(addr), .wdata(wdata), .q(q));

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    for (int n = 0; n < N; n++) begin
      checks++;
      if (q[n] !== shadow[n]) begin
        failures++;
        $display("FAIL word %0d got %0d exp %0d", n, q[n], shadow[n]);
      end
    end
  endtask

  initial begin
    we = 0; addr = '0; wdata = '0;
    foreach (shadow[n]) shadow[n] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    compare();
    for (int t = 0; t < 300; t++) begin
      we    = ($urandom_range(3, 0) != 0);
      addr  = AB'($urandom_range(2 ** AB - 1, 0));
      wdata = data_t'($urandom);
      if (we && addr < N) shadow[addr] = wdata;
      @(negedge clk);
      if (t % 20 == 0) compare();
    end
    we = 0;
    @(negedge clk);
    compare();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
