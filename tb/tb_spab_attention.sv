// tb_spab_attention: self-checking test of the attention unit.
//
// Loads the 512-entry sigma_a table (sigmoid(x) - 0.5 at the interval
// mid-points of (-3, 3), computed here with $exp) and random scales, feeds
// 2000 random (H, X) pairs through the two joined input streams with
// independent random gaps, and checks each output against
// requant(sigma_a(H) * (H + X)). A second pass uses a wide scale for H so
// that inputs beyond both table ends are seen.
module tb_spab_attention;
  import tb_ref_pkg::*;
  localparam int N = 2000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_we = 0;
  logic [15:0] cfg_addr = 0;
  logic [31:0] cfg_wdata = 0;
  logic h_valid = 0, h_ready, x_valid = 0, x_ready, m_valid, m_ready = 0;
  logic [7:0] h_data = 0, x_data = 0, m_data;
  int checks = 0, failures = 0, nout = 0;
  int exp_q[$];

  spab_attention dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    m_ready = ($urandom_range(3) != 0);
    #1;
    if (m_valid && m_ready) begin
      checks++;
      if (int'(m_data) != exp_q[0]) begin
        failures++;
        if (failures < 10) $display("out %0d: got %0d exp %0d", nout, m_data, exp_q[0]);
      end
      void'(exp_q.pop_front());
      nout++;
    end
  end

  task automatic cfg(input int region, input int idx, input int data);
    @(negedge clk);
    cfg_we = 1; cfg_addr = 16'((region << 13) | idx); cfg_wdata = data;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic load_params(att_param a);
    cfg(1, 0, a.scale_h); cfg(1, 1, a.zp_h); cfg(1, 2, a.scale_x); cfg(1, 3, a.zp_x);
    cfg(1, 4, a.mult);    cfg(1, 5, a.shift); cfg(1, 6, a.zp);
  endtask

  int hs[], xs[], lut[], ex[];
  att_param a;

  task automatic run();
    hs = new[N]; xs = new[N];
    foreach (hs[i]) begin hs[i] = int'($urandom_range(255)); xs[i] = int'($urandom_range(255)); end
    attention(a, lut, hs, xs, ex);
    foreach (ex[i]) exp_q.push_back(ex[i]);
    fork
      foreach (hs[i]) begin
        @(negedge clk);
        while ($urandom_range(2) == 0) @(negedge clk);
        h_valid = 1; h_data = 8'(hs[i]);
        #2;
        while (!h_ready) begin @(negedge clk); #2; end
        @(posedge clk);
        #1 h_valid = 0;
      end
      foreach (xs[i]) begin
        @(negedge clk);
        while ($urandom_range(2) == 0) @(negedge clk);
        x_valid = 1; x_data = 8'(xs[i]);
        #2;
        while (!x_ready) begin @(negedge clk); #2; end
        @(posedge clk);
        #1 x_valid = 0;
      end
    join
    wait (exp_q.size() == 0);
  endtask

  initial begin
    make_lut(lut);
    a = new();
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (lut[i]) cfg(0, i, lut[i]);
    load_params(a);
    run();
    a.scale_h = 1500000;   // about 0.045: (x - zp) * scale reaches beyond +-3
    load_params(a);
    run();
    checks++;
    if (nout != 2*N) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
