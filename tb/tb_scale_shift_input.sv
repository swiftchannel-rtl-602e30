// tb_scale_shift_input: self-checking test of the input quantiser.
//
// Programs mult/shift/zero point, streams random complex FIX32 values
// (including values far enough out to saturate at 0 and 255) with random
// gaps and back-pressure, and checks that each sample gives two U8 outputs,
// real part first, equal to round(x * mult / 2^shift) + zp, clamped.
module tb_scale_shift_input;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_we = 0;
  logic [15:0] cfg_addr = 0;
  logic [31:0] cfg_wdata = 0;
  logic s_valid = 0, s_ready, m_valid, m_ready = 0;
  logic [63:0] s_data = 0;
  logic [7:0] m_data;
  int checks = 0, failures = 0, nout = 0;
  int exp_q[$];
  int mult = 1677722, shift = 40, zp = 128;   // scale = 2^-25*2^40/mult, about 0.02

  scale_shift_input dut (.*);

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
        $display("value %0d: got %0d exp %0d", nout, m_data, exp_q[0]);
      end
      void'(exp_q.pop_front());
      nout++;
    end
  end

  initial begin
    int sat_lo = 0, sat_hi = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk); cfg_we = 1; cfg_addr = 0; cfg_wdata = mult;
    @(negedge clk); cfg_addr = 1; cfg_wdata = shift;
    @(negedge clk); cfg_addr = 2; cfg_wdata = zp;
    @(negedge clk); cfg_we = 0;
    for (int i = 0; i < 500; i++) begin
      int re, im, qr, qi;
      re = int'($urandom_range(32'hFFFFFFF)) - 32'h8000000;   // about +-4.0
      im = int'($urandom_range(32'hFFFFFFF)) - 32'h8000000;
      qr = rq(re, mult, shift, zp);
      qi = rq(im, mult, shift, zp);
      if (qr == 0 || qi == 0) sat_lo++;
      if (qr == 255 || qi == 255) sat_hi++;
      exp_q.push_back(qr);
      exp_q.push_back(qi);
      @(negedge clk);
      while ($urandom_range(3) == 0) @(negedge clk);
      s_valid = 1; s_data = {32'(im), 32'(re)};
      #2;
      while (!s_ready) begin @(negedge clk); #2; end
      @(posedge clk);
      #1 s_valid = 0;
    end
    wait (exp_q.size() == 0);
    checks++;
    if (sat_lo == 0 || sat_hi == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
