// tb_stream_fifo: self-checking test of the stream FIFO.
//
// Depth 5, 12-bit data. Random pushes and pops are compared with a queue model:
// order and content of data and last flag, the occupancy output, ready going
// low exactly when the FIFO holds DEPTH beats and valid low exactly when it is
// empty. Both the full and the empty condition must occur.
module tb_stream_fifo;
  localparam int W = 12, DEPTH = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic s_valid, s_ready, s_last, m_valid, m_ready, m_last;
  logic [W-1:0] s_data, m_data;
  logic [$clog2(DEPTH+1)-1:0] level;

  stream_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0, fulls = 0, empties = 0;
  logic [W:0] q[$];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    s_valid = 0; m_ready = 0; s_data = '0; s_last = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 4000; t++) begin
      int bias;
      @(negedge clk);
      bias = (t / 500) % 2;   // alternate filling and draining phases
      if (!s_valid || s_ready) begin
        s_valid = ($urandom_range(3, 0) < (bias ? 3 : 1));
        s_data  = W'($urandom);
        s_last  = $urandom_range(1, 0);
      end
      m_ready = ($urandom_range(3, 0) < (bias ? 1 : 3));
      #1;
      checks++;
      if (level != $bits(level)'(q.size()) || s_ready != (q.size() < DEPTH) ||
          m_valid != (q.size() > 0)) begin
        failures++;
        if (failures < 10) $display("t=%0d level %0d model %0d", t, level, q.size());
      end
      if (q.size() == DEPTH) fulls++;
      if (q.size() == 0) empties++;
      if (m_valid && m_ready) begin
        checks++;
        if ({m_last, m_data} != q[0]) failures++;
      end
      @(posedge clk);
      if (m_valid && m_ready) void'(q.pop_front());
      if (s_valid && s_ready) q.push_back({s_last, s_data});
    end
    checks++;
    if (fulls == 0 || empties == 0) begin failures++; $display("full/empty not reached"); end
    $display("full %0d empty %0d", fulls, empties);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
