// node_buffer: the on-chip copy of the particle matrix I, kept column-major
// in a ring of NBANK banks.
//
// Particle (node) feature vectors arrive one per handshake, a column of P
// Q12.12 features each, NO columns per graph. They fill the write bank; after
// the NO-th column the bank is marked full and writing moves to the next
// bank. The read side shows the oldest full bank whole (i_mat[node][feature])
// so the edge logic can pick any column in one cycle. g_valid says that bank
// is full, g_pending that the next one is full too; a g_release pulse frees
// the read bank and moves reading to the next bank in the next cycle. While
// every bank is full s_ready is low, which stalls the input channel.
// Column-major storage follows the paper; the bank ring is this design's
// choice. With NBANK = 3 a graph can load while one is processed and one
// waits, so a source delivering one column per cycle keeps an engine that
// needs NO cycles per graph busy without a gap; two banks lose a few cycles
// per graph in that case.
module node_buffer
  import jedi_pkg::*;
#(
  parameter int unsigned NO = 30,
  parameter int unsigned P  = 16,
  parameter int unsigned NBANK = 3
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  s_valid,
  output logic  s_ready,
  input  data_t s_col [P],
  output logic  g_valid,
  output logic  g_pending,
  output data_t i_mat [NO][P],
  input  logic  g_release
);
  localparam int unsigned CB = $clog2(NO);

  localparam int unsigned KB = (NBANK > 1) ? $clog2(NBANK) : 1;

  data_t             bank   [NBANK][NO][P];
  logic  [NBANK-1:0] full_q;
  logic  [KB-1:0]    wb_q, rb_q;
  logic  [CB-1:0]    wcnt_q;

  function automatic logic [KB-1:0] nxt(logic [KB-1:0] k);
    return (32'(k) == NBANK - 1) ? '0 : k + 1'b1;
  endfunction

  assign s_ready   = !full_q[wb_q];
  assign g_valid   = full_q[rb_q];
  assign g_pending = full_q[nxt(rb_q)];
  always_comb i_mat = bank[rb_q];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      full_q <= '0;
      wb_q   <= '0;
      rb_q   <= '0;
      wcnt_q <= '0;
      for (int k = 0; k < NBANK; k++)
        for (int n = 0; n < NO; n++)
          for (int f = 0; f < P; f++) bank[k][n][f] <= '0;
    end else begin
      if (s_valid && s_ready) begin
        bank[wb_q][wcnt_q] <= s_col;
        if (32'(wcnt_q) == NO - 1) begin
          wcnt_q       <= '0;
          full_q[wb_q] <= 1'b1;
          wb_q         <= nxt(wb_q);
        end else begin
          wcnt_q <= wcnt_q + 1'b1;
        end
      end
      if (g_release && full_q[rb_q]) begin
        full_q[rb_q] <= 1'b0;
        rb_q         <= nxt(rb_q);
      end
    end
  end

  always_ff @(posedge clk)
    if (rst_n) a_release_full: assert (!g_release || full_q[rb_q])
      else $error("node_buffer: release of an empty bank");
endmodule
