// tb_ll_gnn_u4: runs tb_ll_gnn_sized at the latency-optimised 50-particle
// point: 25 lanes of a two-layer f_R (32-8-8), f_O 24-32-32-32 and
// phi_O 32-32-5. Each node needs ceil(49/25) = 2 edge groups, so jets
// follow every 100 cycles. The head's hidden width (32) is an assumption.
module tb_ll_gnn_u4;
  logic done;
  int   checks, failures;

  tb_ll_gnn_sized #(
    .NO(50), .NFR(25),
    .NL_R(2), .DIMS_R('{32, 8, 8, 0, 0, 0, 0, 0, 0}),
    .NL_O(3), .DIMS_O('{24, 32, 32, 32, 0, 0, 0, 0, 0}),
    .NL_P(2), .DIMS_P('{32, 32, 5, 0, 0, 0, 0, 0, 0})) u_tb (
    .done(done), .checks(checks), .failures(failures));

  initial begin : watchdog
    repeat (200000) #10;  // 200000 clock periods of the inner bench
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    wait (done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
