// tb_output_dequant: self-checking test of the output de-quantiser.
//
// Writes a scale and zero point, streams three frames of FRAME_N = 50 random
// values with random gaps and back-pressure, and checks every FIX32 result,
// (x - zp) * scale, and that TLAST is high exactly on the last value of each
// frame.
module tb_output_dequant;
  import tb_ref_pkg::*;
  localparam int FN = 50;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_we = 0;
  logic [15:0] cfg_addr = 0;
  logic [31:0] cfg_wdata = 0;
  logic s_valid = 0, s_ready, m_valid, m_ready = 0, m_last;
  logic [7:0] s_data = 0;
  logic signed [31:0] m_data;
  int checks = 0, failures = 0, nout = 0;
  int exp_q[$];
  int scale = 1234567, zp = 131;

  output_dequant #(.FRAME_N(FN)) dut (.*);

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
      checks += 2;
      if (m_data != exp_q[0]) begin
        failures++;
        $display("value %0d: got %0d exp %0d", nout, m_data, exp_q[0]);
      end
      if (m_last != ((nout % FN) == FN - 1)) begin
        failures++;
        $display("value %0d: last=%0d", nout, m_last);
      end
      void'(exp_q.pop_front());
      nout++;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk); cfg_we = 1; cfg_addr = 0; cfg_wdata = scale;
    @(negedge clk); cfg_addr = 1; cfg_wdata = zp;
    @(negedge clk); cfg_we = 0;
    for (int i = 0; i < 3*FN; i++) begin
      int v;
      @(negedge clk);
      while ($urandom_range(3) == 0) @(negedge clk);
      v = int'($urandom_range(255));
      s_valid = 1; s_data = 8'(v);
      exp_q.push_back(dq(v, zp, scale));
      #2;
      while (!s_ready) begin @(negedge clk); #2; end
      @(posedge clk);
      #1 s_valid = 0;
    end
    wait (exp_q.size() == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
