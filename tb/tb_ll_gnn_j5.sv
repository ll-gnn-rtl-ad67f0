// tb_ll_gnn_j5: runs tb_ll_gnn_sized at the accuracy-optimised 30-particle
// point: a two-layer f_R of width 32 (so De = 32), f_O 48-48-48-48,
// phi_O 48-48-5 and 6 f_R lanes. Each node needs ceil(29/6) = 5 edge groups,
// so jets follow every 150 cycles.
module tb_ll_gnn_j5;
  logic done;
  int   checks, failures;

  tb_ll_gnn_sized #(
    .NO(30), .NFR(6),
    .NL_R(2), .DIMS_R('{32, 32, 32, 0, 0, 0, 0, 0, 0}),
    .NL_O(3), .DIMS_O('{48, 48, 48, 48, 0, 0, 0, 0, 0}),
    .NL_P(2), .DIMS_P('{48, 48, 5, 0, 0, 0, 0, 0, 0}),
    .WR_RANGE(200), .WO_RANGE(150), .WP_RANGE(150)) u_tb (
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
