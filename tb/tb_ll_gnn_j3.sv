// tb_ll_gnn_j3: runs tb_ll_gnn_sized at the 30-particle point with
// three-layer f_R and f_O of width 20 and 10 f_R lanes. Each node needs
// ceil(29/10) = 3 edge groups, so jets follow every 90 cycles. The output
// MLP's hidden width (20) is an assumption; the published description of
// this point gives only the f_R and f_O shapes.
module tb_ll_gnn_j3;
  logic done;
  int   checks, failures;

  tb_ll_gnn_sized #(
    .NO(30), .NFR(10),
    .NL_R(3), .DIMS_R('{32, 20, 20, 20, 0, 0, 0, 0, 0}),
    .NL_O(3), .DIMS_O('{36, 20, 20, 20, 0, 0, 0, 0, 0}),
    .NL_P(2), .DIMS_P('{20, 20, 5, 0, 0, 0, 0, 0, 0}),
    .WR_RANGE(300), .WO_RANGE(300), .WP_RANGE(300)) u_tb (
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
