// tb_mmm3_agg: feeds random edge columns, 3 lanes per cycle with random
// masks and random gaps, grouped into nodes of 1 to 4 cycles, and checks each
// aggregated column against the saturated sum of its unmasked inputs, one
// cycle after the node's last group. Large inputs exercise saturation.
module tb_mmm3_agg;
  import jedi_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned NFR = 3, DE = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_sat = 0;

  logic  e_valid, e_first, e_last, ebar_valid;
  logic  e_mask [NFR];
  data_t e_cols [NFR][DE];
  data_t ebar [DE];

  mmm3_agg #(.NFR(NFR), .DE(DE)) dut (
    .clk(clk), .rst_n(rst_n), .e_valid(e_valid), .e_first(e_first), .e_last(e_last),
    .e_mask(e_mask), .e_cols(e_cols), .ebar_valid(ebar_valid), .ebar(ebar));

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    e_valid = 0; e_first = 0; e_last = 0;
    foreach (e_mask[q]) e_mask[q] = 0;
    foreach (e_cols[q, j]) e_cols[q][j] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int nd = 0; nd < 80; nd++) begin
      longint s [DE];
      automatic bit big = (nd % 10 == 9);
      automatic int ng = big ? 3 : $urandom_range(4, 1);
      foreach (s[j]) s[j] = 0;
      for (int g = 0; g < ng; g++) begin
        e_valid = 1; e_first = (g == 0); e_last = (g == ng - 1);
        for (int q = 0; q < NFR; q++) begin
          e_mask[q] = (g < ng - 1) || ($urandom_range(2, 0) != 0) || (q == 0);
          for (int j = 0; j < DE; j++) begin
            automatic longint v = big ? longint'(24'sh7FF000) : rnd_q(-4000, 4000);
            e_cols[q][j] = data_t'(v);
            if (e_mask[q]) s[j] += v * 16;
          end
        end
        @(negedge clk);
        e_valid = 0;
        checks++;
        if (ebar_valid != (g == ng - 1)) begin failures++; $display("FAIL ebar_valid"); end
        while ($urandom_range(2, 0) == 0) begin
          e_valid = 0;
          foreach (e_cols[q, j]) e_cols[q][j] = data_t'($urandom);
          @(negedge clk);
        end
      end
      // ebar holds its value until the next node ends
      for (int j = 0; j < DE; j++) begin
        checks++;
        if (acc_out(s[j]) != (s[j] >>> 4)) n_sat++;
        if (longint'(ebar[j]) != acc_out(s[j])) begin
          failures++;
          $display("FAIL node %0d j %0d got %0d exp %0d", nd, j, ebar[j], acc_out(s[j]));
        end
      end
    end
    checks++;
    if (n_sat == 0) begin failures++; $display("FAIL saturation never reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
