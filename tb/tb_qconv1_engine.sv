// tb_qconv1_engine: self-checking test of the 1x1 up-sampling convolution.
//
// Loads random parameters for 4 -> 32 channels, streams 60 random pixels
// with random gaps and back-pressure, and compares the 32 outputs of each
// pixel with the reference model. Then checks the rate with the input always
// valid and the output always ready: 32 cycles per pixel (output-bound).
module tb_qconv1_engine;
  import tb_ref_pkg::*;
  localparam int FIN = 4, FOUT = 32, NP = 60;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_we = 0;
  logic [15:0] cfg_addr = 0;
  logic [31:0] cfg_wdata = 0;
  logic s_valid = 0, s_ready, m_valid, m_ready = 0;
  logic [7:0] s_data = 0, m_data;
  int checks = 0, failures = 0, nout = 0;
  int got[$];
  bit free_run = 0;

  qconv1_engine #(.FIN(FIN), .FOUT(FOUT)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    m_ready = free_run || ($urandom_range(2) != 0);
    #1;
    if (m_valid && m_ready) got.push_back(int'(m_data));
  end

  task automatic cfg(input int region, input int idx, input int data);
    @(negedge clk);
    cfg_we = 1; cfg_addr = 16'((region << 13) | idx); cfg_wdata = data;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic send(input int v, input bit gaps);
    @(negedge clk);
    while (gaps && $urandom_range(3) == 0) @(negedge clk);
    s_valid = 1; s_data = 8'(v);
    #2;
    while (!s_ready) begin @(negedge clk); #2; end
    @(posedge clk);
    #1 s_valid = 0;
  endtask

  conv_layer l;
  int in_a[], exp_a[];
  int t0;
  initial begin
    l = new(FIN, FOUT, 1);
    in_a = new[NP*FIN];
    foreach (in_a[i]) in_a[i] = int'($urandom_range(255));
    conv1(NP, l, in_a, exp_a);
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (l.w[i]) cfg(0, i, l.w[i]);
    for (int fo = 0; fo < FOUT; fo++) begin
      cfg(1, fo, l.bias[fo]); cfg(2, fo, l.mult[fo]); cfg(3, fo, l.shift[fo]);
    end
    cfg(4, 0, (l.zpo << 8) | l.zpi);
    foreach (in_a[i]) send(in_a[i], 1);
    wait (got.size() == NP*FOUT);
    free_run = 1;
    t0 = $time / 10;
    fork
      foreach (in_a[i]) send(in_a[i], 0);
    join_none
    wait (got.size() == 2*NP*FOUT);
    checks++;
    if (($time / 10) - t0 > NP*FOUT + 20) begin
      failures++;
      $display("rate: %0d cycles for %0d pixels", ($time / 10) - t0, NP);
    end
    foreach (got[i]) begin
      checks++;
      if (got[i] != exp_a[i % (NP*FOUT)]) begin
        failures++;
        if (failures < 10) $display("out %0d: got %0d exp %0d", i, got[i], exp_a[i % (NP*FOUT)]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
