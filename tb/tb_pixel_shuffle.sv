// tb_pixel_shuffle: self-checking test of the pipelined pixel shuffle.
//
// Default r = 4 and 2 output channels (32 input channels) on a small 3 x 4
// map. Streams two frames with random gaps and back-pressure and compares the
// output order with a direct depth-to-space of the frame. Then runs one frame
// with the input always valid and the output always ready and checks that
// the output is busy (one value per cycle) for all but a small part of the
// time, and that the first output value leaves before the first input row
// is complete (first sub-row written while it is read).
module tb_pixel_shuffle;
  import tb_ref_pkg::*;
  localparam int H = 3, W = 4, R = 4, CO = 2, CIN = CO*R*R, NIN = H*W*CIN;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic s_valid = 0, s_ready, m_valid, m_ready = 0;
  logic [7:0] s_data = 0, m_data;
  int checks = 0, failures = 0, nin = 0;
  int got[$];
  bit free_run = 0;

  pixel_shuffle #(.W(W), .R(R), .COUT(CO)) dut (.*);

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
  always @(posedge clk) if (s_valid && s_ready) nin <= nin + 1;

  task automatic send(input int v, input bit gaps);
    @(negedge clk);
    while (gaps && $urandom_range(3) == 0) @(negedge clk);
    s_valid = 1; s_data = 8'(v);
    #2;
    while (!s_ready) begin @(negedge clk); #2; end
    @(posedge clk);
    #1 s_valid = 0;
  endtask

  int in_a[], exp_a[];
  int t0, first_out_at;
  initial begin
    in_a = new[NIN];
    foreach (in_a[i]) in_a[i] = int'($urandom_range(255));
    shuffle(H, W, R, CO, in_a, exp_a);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < 2; f++) foreach (in_a[i]) send(in_a[i], 1);
    wait (got.size() == 2*NIN);
    // Full rate.
    free_run = 1;
    @(negedge clk);
    t0 = $time / 10;
    first_out_at = -1;
    fork
      foreach (in_a[i]) send(in_a[i], 0);
      begin
        wait (got.size() > 2*NIN);
        first_out_at = nin - 2*NIN;
      end
    join_none
    wait (got.size() == 3*NIN);
    checks++;
    $display("full rate: %0d values in %0d cycles, first output after %0d inputs",
             NIN, ($time / 10) - t0, first_out_at);
    if (($time / 10) - t0 > NIN + W*CIN + 40) failures++;
    checks++;
    if (first_out_at < 0 || first_out_at >= W*CIN) failures++;
    foreach (got[i]) begin
      checks++;
      if (got[i] != exp_a[i % NIN]) begin
        failures++;
        if (failures < 10) $display("out %0d: got %0d exp %0d", i, got[i], exp_a[i % NIN]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
