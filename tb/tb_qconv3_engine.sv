// tb_qconv3_engine: self-checking test of one quantised 3x3 convolution
// engine (window generator + tiled filter + parameter memory).
//
// Loads random weights, biases, re-quantisation factors and zero points
// through the configuration port, streams two random frames of a small map
// (6 x 5 x 12 -> 8 channels) with random gaps on the input and random
// back-pressure on the output, and compares every output value with the
// reference model of tb_ref_pkg. A second run of the same frame (the engine
// restarts by itself) checks the frame-to-frame restart.
module tb_qconv3_engine;
  import tb_ref_pkg::*;

  localparam int H = 6, W = 5, FIN = 12, FOUT = 8;

  logic        clk = 0, rst_n = 0;
  logic        cfg_we = 0;
  logic [15:0] cfg_addr = 0;
  logic [31:0] cfg_wdata = 0;
  logic        s_valid = 0, s_ready, m_valid, m_ready = 0;
  logic [7:0]  s_data = 0, m_data, zp_out;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  qconv3_engine #(.H(H), .W(W), .FIN(FIN), .FOUT(FOUT), .TM(4), .TN(4)) dut (.*);

  task automatic cfg(input int region, input int idx, input int data);
    @(negedge clk);
    cfg_we = 1; cfg_addr = 16'((region << 13) | idx); cfg_wdata = data;
    @(negedge clk);
    cfg_we = 0;
  endtask

  conv_layer l;
  int in_a[], exp_a[];
  int got[$];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Output sink with random back-pressure.
  always @(negedge clk) begin
    m_ready = ($urandom_range(3) != 0);
    #1;
    if (m_valid && m_ready) got.push_back(int'(m_data));
  end

  // Offers one value and returns after the clock edge that takes it.
  task automatic send(input int v);
    @(negedge clk);
    while ($urandom_range(4) == 0) @(negedge clk);
    s_valid = 1; s_data = 8'(v);
    #2;
    while (!s_ready) begin @(negedge clk); #2; end
    @(posedge clk);
    #1 s_valid = 0;
  endtask

  initial begin
    l = new(FIN, FOUT, 9);
    in_a = new[H*W*FIN];
    foreach (in_a[i]) in_a[i] = int'($urandom_range(255));
    conv3(H, W, l, in_a, exp_a);

    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (l.w[i]) cfg(0, i, l.w[i]);
    for (int fo = 0; fo < FOUT; fo++) begin
      cfg(1, fo, l.bias[fo]);
      cfg(2, fo, l.mult[fo]);
      cfg(3, fo, l.shift[fo]);
    end
    cfg(4, 0, (l.zpo << 8) | l.zpi);
    if (zp_out != 8'(l.zpo)) failures++;
    checks++;

    for (int frame = 0; frame < 2; frame++) begin
      foreach (in_a[i]) send(in_a[i]);
    end
    wait (got.size() == 2*H*W*FOUT);
    repeat (20) @(posedge clk);
    if (got.size() != 2*H*W*FOUT) begin
      failures++;
      $display("extra outputs: %0d", got.size());
    end
    for (int i = 0; i < 2*H*W*FOUT; i++) begin
      checks++;
      if (got[i] != exp_a[i % (H*W*FOUT)]) begin
        failures++;
        if (failures < 10) $display("mismatch %0d: got %0d exp %0d", i, got[i], exp_a[i % (H*W*FOUT)]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
