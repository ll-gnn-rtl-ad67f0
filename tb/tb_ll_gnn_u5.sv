// tb_ll_gnn_u5: runs tb_ll_gnn_sized at the accuracy-optimised 50-particle
// point: 17 lanes of a two-layer f_R (32-8-8), f_O 24-48-48-48 and
// phi_O 48-48-5. Each node needs ceil(49/17) = 3 edge groups, so jets
// follow every 150 cycles.
module tb_ll_gnn_u5;
  logic done;
  int   checks, failures;

  tb_ll_gnn_sized #(
    .NO(50), .NFR(17),
    .NL_R(2), .DIMS_R('{32, 8, 8, 0, 0, 0, 0, 0, 0})) u_tb (
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
