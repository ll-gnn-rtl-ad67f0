// weight_store: register file holding the weights and biases of one MLP.
//
// The trained coefficients of f_R, f_O and phi_O are loaded once through a
// simple write port (we, addr, data: one Q12.12 word per cycle) and are then
// read in parallel by every multiplier, so the store is a bank of registers
// rather than a RAM. Every word resets to zero. The paper fixes the
// coefficients at build time; loading them at run time through this port is
// this design's choice, so that one netlist serves any trained model of the
// same shape. A write lands one cycle after we is sampled.
module weight_store
  import jedi_pkg::*;
#(
  parameter int unsigned N  = 16,
  parameter int unsigned AB = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          we,
  input  logic [AB-1:0] addr,
  input  data_t         wdata,
  output data_t         q [N]
);
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int n = 0; n < N; n++) q[n] <= '0;
    end else if (we && (32'(addr) < N)) begin
      q[addr] <= wdata;
    end
  end
endmodule
