// tb_ls_estimator: self-checking test of the LS estimator.
//
// Loads a random pilot table (already divided by |s|^2, as the block expects)
// for a small grid of 4 subcarriers x (3 antennas x 2 UE antennas), streams
// eight frames of random received samples with random gaps and back-pressure
// (every second frame over the full FIX32 range, and some pilots at the
// extremes of the range, so that the saturating products and sums are hit),
// and checks every complex result against y * conj(p) computed in the
// testbench, including that column w uses the pilot of UE antenna w mod 2.
// It also checks the rate at full speed: one sample per cycle.
module tb_ls_estimator;
  import tb_ref_pkg::*;
  localparam int NK = 4, NR = 3, NUE = 2, NS = NK*NR*NUE;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_we = 0;
  logic [15:0] cfg_addr = 0;
  logic [31:0] cfg_wdata = 0;
  logic s_valid = 0, s_ready, m_valid, m_ready = 0;
  logic [63:0] s_data = 0, m_data;
  int checks = 0, failures = 0, nout = 0;
  int pr [NK*NUE], pim [NK*NUE];
  longint exp_q[$];
  bit free_run = 0;

  ls_estimator #(.N_K(NK), .N_R(NR), .N_UE(NUE)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    m_ready = free_run || ($urandom_range(2) != 0);
    #1;
    if (m_valid && m_ready) begin
      checks++;
      if (m_data != 64'(exp_q[0])) begin
        failures++;
        $display("sample %0d: got %h exp %h", nout, m_data, exp_q[0]);
      end
      void'(exp_q.pop_front());
      nout++;
    end
  end

  task automatic send(input int idx, input bit gaps);
    int yr, yi, k, u, hr, hi;
    @(negedge clk);
    while (gaps && $urandom_range(3) == 0) @(negedge clk);
    if ((idx / NS) % 2 == 1) begin
      // full FIX32 range: products and sums saturate
      yr = int'($urandom);
      yi = int'($urandom);
    end else begin
      yr = int'($urandom_range(32'h7FFFFFF)) - 32'h4000000;   // about +-2.0
      yi = int'($urandom_range(32'h7FFFFFF)) - 32'h4000000;
    end
    k = (idx % NS) / (NR*NUE);
    u = (idx % (NR*NUE)) % NUE;
    hr = sat32(longint'(fmul(yr, pr[k*NUE+u])) + longint'(fmul(yi, pim[k*NUE+u])));
    hi = sat32(longint'(fmul(yi, pr[k*NUE+u])) - longint'(fmul(yr, pim[k*NUE+u])));
    exp_q.push_back({32'(hi), 32'(hr)});
    s_valid = 1; s_data = {32'(yi), 32'(yr)};
    #2;
    while (!s_ready) begin @(negedge clk); #2; end
    @(posedge clk);
    #1 s_valid = 0;
  endtask

  int t0;
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NK*NUE; i++) begin
      if (i % 4 == 3) begin
        // pilots at the extremes of the FIX32 range
        pr[i]  = (i % 8 == 3) ? 32'sh8000_0000 : 32'sh7FFF_FFFF;
        pim[i] = 32'sh8000_0000;
      end else begin
        pr[i]  = int'($urandom_range(32'h3FFFFFF)) - 32'h2000000;  // about +-1.0
        pim[i] = int'($urandom_range(32'h3FFFFFF)) - 32'h2000000;
      end
      @(negedge clk); cfg_we = 1; cfg_addr = 16'(2*i);   cfg_wdata = pr[i];
      @(negedge clk); cfg_we = 1; cfg_addr = 16'(2*i+1); cfg_wdata = pim[i];
    end
    @(negedge clk); cfg_we = 0;
    for (int i = 0; i < 8*NS; i++) send(i, 1);
    wait (exp_q.size() == 0);
    // Full rate: the valid is held for NS consecutive cycles.
    free_run = 1;
    @(negedge clk);
    t0 = nout;
    for (int i = 0; i < NS; i++) begin
      int yr, yi, k, u, hr, hi;
      yr = int'($urandom_range(32'h7FFFFFF)) - 32'h4000000;
      yi = int'($urandom_range(32'h7FFFFFF)) - 32'h4000000;
      k = i / (NR*NUE); u = (i % (NR*NUE)) % NUE;
      hr = sat32(longint'(fmul(yr, pr[k*NUE+u])) + longint'(fmul(yi, pim[k*NUE+u])));
      hi = sat32(longint'(fmul(yi, pr[k*NUE+u])) - longint'(fmul(yr, pim[k*NUE+u])));
      exp_q.push_back({32'(hi), 32'(hr)});
      s_valid = 1; s_data = {32'(yi), 32'(yr)};
      #2;
      checks++;
      if (!s_ready) failures++;
      @(negedge clk);
    end
    s_valid = 0;
    @(negedge clk);
    checks++;
    if (nout - t0 != NS) begin
      failures++;
      $display("full rate: %0d outputs in %0d cycles", nout - t0, NS + 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
