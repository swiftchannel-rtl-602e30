// tb_filter3d: self-checking test of the tiled convolution filter.
//
// Feeds random 3x3x12 windows directly (no window generator) and compares
// the 8 re-quantised outputs of each with a direct (untiled) computation.
// First with random gaps and back-pressure, then with the input always valid
// and the output always ready, where the rate is checked: a window needs
// (FOUT/TM)*(FIN/TN) = 6 cycles of tiles (initiation interval 1) and 8 cycles
// of output, overlapped, so N windows must take 8*N cycles plus a few.
module tb_filter3d;
  import sc_pkg::*;
  import tb_ref_pkg::*;

  localparam int FIN = 12, FOUT = 8, TM = 4, TN = 4, N = 40;

  logic               clk = 0, rst_n = 0;
  i8_t                wgt   [FOUT][FIN][3][3];
  i32_t               bias  [FOUT];
  logic signed [31:0] mult  [FOUT];
  logic [5:0]         shift [FOUT];
  u8_t                zp_out = 8'd120;
  logic               s_valid = 0, s_ready, m_valid, m_ready = 0;
  shifted_t           s_win [FIN][3][3];
  u8_t                m_data;
  int checks = 0, failures = 0;
  int exp_q[$];
  int nout = 0;
  bit free_run = 0;

  always #5 clk = ~clk;

  filter3d #(.FIN(FIN), .FOUT(FOUT), .TM(TM), .TN(TN)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    m_ready = free_run || ($urandom_range(3) != 0);
    #1;
    if (m_valid && m_ready) begin
      int e;
      e = exp_q.pop_front();
      checks++;
      if (int'(m_data) != e) begin
        failures++;
        if (failures < 10) $display("out %0d: got %0d exp %0d", nout, m_data, e);
      end
      nout++;
    end
  end

  task automatic new_window();
    for (int f = 0; f < FIN; f++)
      for (int r = 0; r < 3; r++)
        for (int c = 0; c < 3; c++) s_win[f][r][c] = 9'(int'($urandom_range(510)) - 255);
    for (int fo = 0; fo < FOUT; fo++) begin
      longint acc;
      acc = bias[fo];
      for (int f = 0; f < FIN; f++)
        for (int r = 0; r < 3; r++)
          for (int c = 0; c < 3; c++) acc += longint'(s_win[f][r][c]) * longint'(wgt[fo][f][r][c]);
      exp_q.push_back(rq(acc, mult[fo], shift[fo], int'(zp_out)));
    end
  endtask

  int t0, t1;
  initial begin
    for (int fo = 0; fo < FOUT; fo++) begin
      for (int f = 0; f < FIN; f++)
        for (int r = 0; r < 3; r++)
          for (int c = 0; c < 3; c++) wgt[fo][f][r][c] = 8'(int'($urandom_range(255)) - 128);
      bias[fo] = int'($urandom_range(20000)) - 10000;
      mult[fo] = 32'(200 + $urandom_range(200));
      shift[fo] = 6'd18;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // Phase 1: random handshakes.
    for (int n = 0; n < N; n++) begin
      @(negedge clk);
      while ($urandom_range(3) == 0) @(negedge clk);
      new_window();
      s_valid = 1;
      #2;
      while (!s_ready) begin @(negedge clk); #2; end
      @(posedge clk);
      #1 s_valid = 0;
    end
    wait (exp_q.size() == 0);
    repeat (5) @(negedge clk);
    // Phase 2: full rate.
    free_run = 1;
    t0 = $time / 10;
    for (int n = 0; n < N; n++) begin
      @(negedge clk);
      new_window();
      s_valid = 1;
      #2;
      while (!s_ready) begin @(negedge clk); #2; end
      @(posedge clk);
      #1 s_valid = 0;
    end
    wait (exp_q.size() == 0);
    t1 = $time / 10;
    checks++;
    if ((t1 - t0) < 8*N - 8 || (t1 - t0) > 8*N + 12) begin
      failures++;
      $display("rate: %0d cycles for %0d windows, expected about %0d", t1 - t0, N, 8*N);
    end
    $display("full-rate: %0d cycles for %0d windows", t1 - t0, N);
    checks++;
    if (nout != 2*N*FOUT) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
