// tb_window3d: self-checking test of the sliding-window generator.
//
// Streams two random frames (5 rows x 4 columns x 3 channels) with random
// input gaps and output back-pressure, and compares every window element
// with the value expected from the frame: x - zp inside the map, 0 in the
// padding. Also checks that the first window does not appear before pixel
// W+1 of the first row below has been written (the ramp-up of the paper).
module tb_window3d;
  import sc_pkg::*;

  localparam int H = 5, W = 4, FIN = 3;

  logic     clk = 0, rst_n = 0;
  logic     s_valid = 0, s_ready, m_valid, m_ready = 0;
  u8_t      s_data = 0, zp = 8'd77;
  shifted_t m_win [FIN][3][3];
  int checks = 0, failures = 0;
  int frame_in [H*W*FIN];
  int n_in = 0, n_win = 0;

  always #5 clk = ~clk;

  window3d #(.H(H), .W(W), .FIN(FIN)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (s_valid && s_ready) n_in <= n_in + 1;

  always @(negedge clk) begin
    m_ready = ($urandom_range(2) != 0);
    #1;
    if (m_valid && m_ready) begin
      int p, y, x;
      p = n_win % (H*W);
      y = p / W; x = p % W;
      // ramp-up: the rows below must be in (frame-local count of values written)
      if (n_win < H*W) begin
        checks++;
        if (n_in < FIN * ((p + W + 2 < H*W) ? p + W + 2 : H*W)) begin
          failures++;
          $display("window %0d issued too early (n_in=%0d)", p, n_in);
        end
      end
      for (int f = 0; f < FIN; f++)
        for (int r = 0; r < 3; r++)
          for (int c = 0; c < 3; c++) begin
            int yy, xx, e;
            yy = y + r - 1; xx = x + c - 1;
            e = (yy < 0 || yy >= H || xx < 0 || xx >= W) ? 0 : frame_in[(yy*W + xx)*FIN + f] - int'(zp);
            checks++;
            if (int'(m_win[f][r][c]) != e) begin
              failures++;
              if (failures < 10) $display("win %0d f%0d r%0d c%0d: got %0d exp %0d", n_win, f, r, c, m_win[f][r][c], e);
            end
          end
      n_win++;
    end
  end

  initial begin
    foreach (frame_in[i]) frame_in[i] = int'($urandom_range(255));
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int frame = 0; frame < 2; frame++)
      foreach (frame_in[i]) begin
        @(negedge clk);
        while ($urandom_range(3) == 0) @(negedge clk);
        s_valid = 1; s_data = 8'(frame_in[i]);
        #2;
        while (!s_ready) begin @(negedge clk); #2; end
        @(posedge clk);
        #1 s_valid = 0;
      end
    wait (n_win == 2*H*W);
    repeat (20) @(posedge clk);
    checks++;
    if (n_win != 2*H*W) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
