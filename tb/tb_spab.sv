// tb_spab: self-checking test of one swift parameter-free attention block.
//
// Loads random parameters for both convolutions (12 -> 8 -> 12), the ReLU
// zero point (taken from the first convolution's output zero point) and the
// attention unit, streams two frames of a 6 x 5 x 12 map with random gaps and
// back-pressure, and compares every output with the reference model
// conv3 -> ReLU -> conv3 -> attention with the block input as residual. The
// bypass FIFO's largest occupancy is reported and must stay within its depth.
module tb_spab;
  import tb_ref_pkg::*;
  localparam int H = 6, W = 5, C = 12, MID = 8, NV = H*W*C;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_we = 0;
  logic [1:0] cfg_sub = 0;
  logic [15:0] cfg_addr = 0;
  logic [31:0] cfg_wdata = 0;
  logic s_valid = 0, s_ready, m_valid, m_ready = 0;
  logic [7:0] s_data = 0, m_data;
  int checks = 0, failures = 0;
  int got[$];

  spab #(.H(H), .W(W), .C(C), .MID(MID)) dut (.*);

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    m_ready = ($urandom_range(3) != 0);
    #1;
    if (m_valid && m_ready) got.push_back(int'(m_data));
  end

  task automatic cfg(input int sub, input int region, input int idx, input int data);
    @(negedge clk);
    cfg_we = 1; cfg_sub = 2'(sub); cfg_addr = 16'((region << 13) | idx); cfg_wdata = data;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic load_conv(input int sub, conv_layer l);
    foreach (l.w[i]) cfg(sub, 0, i, l.w[i]);
    for (int fo = 0; fo < l.fout; fo++) begin
      cfg(sub, 1, fo, l.bias[fo]); cfg(sub, 2, fo, l.mult[fo]); cfg(sub, 3, fo, l.shift[fo]);
    end
    cfg(sub, 4, 0, (l.zpo << 8) | l.zpi);
  endtask

  conv_layer la, lb;
  att_param at;
  int in_a[], t1[], t2[], t3[], lut[], exp_a[];
  initial begin
    la = new(C, MID, 9);
    lb = new(MID, C, 9);
    lb.zpi = la.zpo;          // conv_b reads the ReLU output
    at = new();
    at.zp_h = lb.zpo;         // attention de-quantises conv_b's output
    make_lut(lut);
    in_a = new[NV];
    foreach (in_a[i]) in_a[i] = int'($urandom_range(255));
    at.zp_x = la.zpi;         // and the block input
    conv3(H, W, la, in_a, t1);
    relu(la.zpo, t1, t2);
    conv3(H, W, lb, t2, t3);
    attention(at, lut, t3, in_a, exp_a);

    repeat (3) @(negedge clk);
    rst_n = 1;
    load_conv(0, la);
    load_conv(1, lb);
    foreach (lut[i]) cfg(2, 0, i, lut[i]);
    cfg(2, 1, 0, at.scale_h); cfg(2, 1, 1, at.zp_h); cfg(2, 1, 2, at.scale_x);
    cfg(2, 1, 3, at.zp_x); cfg(2, 1, 4, at.mult); cfg(2, 1, 5, at.shift); cfg(2, 1, 6, at.zp);

    for (int f = 0; f < 2; f++)
      foreach (in_a[i]) begin
        @(negedge clk);
        while ($urandom_range(4) == 0) @(negedge clk);
        s_valid = 1; s_data = 8'(in_a[i]);
        #2;
        while (!s_ready) begin @(negedge clk); #2; end
        @(posedge clk);
        #1 s_valid = 0;
      end
    wait (got.size() == 2*NV);
    repeat (30) @(posedge clk);
    checks++;
    if (got.size() != 2*NV) failures++;
    for (int i = 0; i < 2*NV; i++) begin
      checks++;
      if (got[i] != exp_a[i % NV]) begin
        failures++;
        if (failures < 10) $display("out %0d: got %0d exp %0d", i, got[i], exp_a[i % NV]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
