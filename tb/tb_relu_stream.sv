// tb_relu_stream: self-checking test of the quantised ReLU.
//
// Streams 1000 random values with random gaps and back-pressure and checks
// that each output is max(x, zp) and that nothing is lost or repeated.
module tb_relu_stream;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic s_valid = 0, s_ready, m_valid, m_ready = 0;
  logic [7:0] s_data = 0, m_data, zp = 8'd93;
  int checks = 0, failures = 0;
  int exp_q[$];

  relu_stream dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    m_ready = ($urandom_range(2) != 0);
    #1;
    if (m_valid && m_ready) begin
      checks++;
      if (int'(m_data) != exp_q[0]) begin
        failures++;
        $display("got %0d exp %0d", m_data, exp_q[0]);
      end
      void'(exp_q.pop_front());
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 1000; i++) begin
      int v;
      @(negedge clk);
      while ($urandom_range(3) == 0) @(negedge clk);
      v = (i < 256) ? i : int'($urandom_range(255));
      s_valid = 1; s_data = 8'(v);
      exp_q.push_back(v > 93 ? v : 93);
      #2;
      while (!s_ready) begin @(negedge clk); #2; end
      @(posedge clk);
      #1 s_valid = 0;
    end
    wait (exp_q.size() == 0);
    repeat (5) @(posedge clk);
    checks++;
    if (m_valid) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
