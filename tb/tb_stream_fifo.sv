// tb_stream_fifo: random valid and ready on both sides of a 3-deep channel;
// every word must come out once, in order, and the channel must fill (ready
// low) and drain (valid low) along the way.
module tb_stream_fifo;
  localparam int unsigned W = 12, DEPTH = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic         s_valid, s_ready, m_valid, m_ready;
  logic [W-1:0] s_data, m_data;
  logic [W-1:0] sb [$];
  int           n_full = 0, n_out = 0;

  stream_fifo #(.W(W), .DEPTH(DEPTH)) dut (
    .clk(clk), .rst_n(rst_n), .s_valid(s_valid), .s_ready(s_ready), .s_data(s_data),
    .m_valid(m_valid), .m_ready(m_ready), .m_data(m_data));

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    checks++;
    if (s_ready != (sb.size() < DEPTH)) begin failures++; $display("FAIL s_ready"); end
    if (m_valid && m_ready) begin
      logic [W-1:0] e;
      checks++;
      n_out++;
      if (sb.size() == 0) begin failures++; $display("FAIL spurious word"); end
      else begin
        e = sb.pop_front();
        if (m_data !== e) begin failures++; $display("FAIL got %h exp %h", m_data, e); end
      end
    end
    if (s_valid && s_ready) sb.push_back(s_data);
    if (!s_ready) n_full++;
  end

  initial begin
    s_valid = 0; m_ready = 0; s_data = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      automatic int phase = (t / 200) % 3;   // fill-heavy, drain-heavy, balanced
      s_valid = ($urandom_range(9, 0) < (phase == 0 ? 8 : (phase == 1 ? 2 : 5)));
      m_ready = ($urandom_range(9, 0) < (phase == 0 ? 2 : (phase == 1 ? 8 : 5)));
      s_data  = W'($urandom);
      @(negedge clk);
    end
    s_valid = 0; m_ready = 1;
    repeat (DEPTH + 2) @(negedge clk);
    checks++;
    if (sb.size() != 0 || n_full == 0 || n_out < 300) begin
      failures++;
      $display("FAIL left=%0d full_cycles=%0d out=%0d", sb.size(), n_full, n_out);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
