// stream_fifo: the channel between two units, a first-in first-out queue with
// a valid/ready handshake on both sides.
//
// A word moves when valid and ready are both high in a cycle. DEPTH words are
// held in a register array addressed by read and write pointers; a count
// gives full and empty. A word written into an empty queue can be read in the
// next cycle (no fall-through). The paper draws channels between its units;
// their depth and this handshake are this design's choices.
module stream_fifo #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 2
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         s_valid,
  output logic         s_ready,
  input  logic [W-1:0] s_data,
  output logic         m_valid,
  input  logic         m_ready,
  output logic [W-1:0] m_data
);
  localparam int unsigned PB = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [PB-1:0] wp_q, rp_q;
  logic [PB:0]   cnt_q;
  logic          push, pop;

  assign s_ready = (32'(cnt_q) < DEPTH);
  assign m_valid = (cnt_q != '0);
  assign m_data  = mem[rp_q];
  assign push    = s_valid && s_ready;
  assign pop     = m_valid && m_ready;

  function automatic logic [PB-1:0] inc(logic [PB-1:0] p);
    return (32'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp_q  <= '0;
      rp_q  <= '0;
      cnt_q <= '0;
      for (int i = 0; i < DEPTH; i++) mem[i] <= '0;
    end else begin
      if (push) begin
        mem[wp_q] <= s_data;
        wp_q      <= inc(wp_q);
      end
      if (pop) rp_q <= inc(rp_q);
      cnt_q <= cnt_q + (PB+1)'(push) - (PB+1)'(pop);
    end
  end
endmodule
