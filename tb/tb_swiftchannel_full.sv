// tb_swiftchannel_full: two complete frames through the accelerator at the
// sizes of the paper (108 x 32 complex pilot samples in, 432 x 128 x 2 values
// out per frame), with every parameter of the top at its default.
//
// Same model, configuration and checks as tb_swiftchannel_top: a random
// quantised student network is loaded, two frames are streamed back to back
// at full rate (input always offered, output always ready), and each of the
// 2 x 110,592 FIX32 outputs is compared with the reference model. Timing
// checks, at the paper's 200 MHz clock:
//   * first input to last output of the first frame within the 1 ms SRS
//     period (200,000 cycles);
//   * frame period (between the last outputs of the two frames) within
//     176,678 cycles, i.e. at least the 1,132 frames/s the paper reports.
// Output back-pressure is not exercised here; the reduced-size test covers it.
module tb_swiftchannel_full;
  import tb_ref_pkg::*;

  // The sizes of the paper: 108 subcarriers x (16 antennas x 2 UE antennas).
  localparam int N_K = 108, N_R = 16, N_UE = 2, NF = 2;
  localparam int H = N_K, W = N_R*N_UE, NS = H*W, NOUT = H*W*32;

  logic        clk = 0, rst_n = 0;
  logic        cfg_we = 0;
  logic [20:0] cfg_addr = 0;
  logic [31:0] cfg_wdata = 0;
  logic        s_axis_tvalid = 0, s_axis_tready;
  logic [63:0] s_axis_tdata = 0;
  logic        m_axis_tvalid, m_axis_tready = 0, m_axis_tlast;
  logic [31:0] m_axis_tdata;
  int checks = 0, failures = 0;
  bit free_run = 0;

  always #5 clk = ~clk;

  swiftchannel_top dut (.*);

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- model
  conv_layer c_in, c_a[4], c_b[4], c_out, c_up;
  att_param  att[4];
  int lut[];
  int pr[], pim[];
  int ys_r[], ys_i[];
  int inq_mult = 1677722, inq_shift = 40, inq_zp = 128;
  int outq_scale, outq_zp;
  int exp_out[];

  task automatic build_model();
    int q[], t1[], t2[], t3[], cur[];
    c_in = new(2, 12, 9);
    c_in.zpi = inq_zp;
    for (int s = 0; s < 4; s++) begin
      c_a[s] = new(12, 8, 9);
      c_b[s] = new(8, 12, 9);
      att[s] = new();
      c_a[s].zpi = (s == 0) ? c_in.zpo : att[s-1].zp;
      c_b[s].zpi = c_a[s].zpo;
      att[s].zp_h = c_b[s].zpo;
      att[s].zp_x = c_a[s].zpi;
    end
    c_out = new(12, 4, 9);
    c_out.zpi = att[3].zp;
    c_up = new(4, 32, 1);
    c_up.zpi = c_out.zpo;
    outq_zp = c_up.zpo;
    outq_scale = 400000;
    make_lut(lut);

    pr = new[N_K*N_UE]; pim = new[N_K*N_UE];
    foreach (pr[i]) begin
      real sr, si, m2;
      sr = ($urandom_range(1) ? 1.0 : -1.0) * (0.5 + real'($urandom_range(1000)) / 1000.0);
      si = ($urandom_range(1) ? 1.0 : -1.0) * (0.5 + real'($urandom_range(1000)) / 1000.0);
      m2 = sr*sr + si*si;
      pr[i]  = int'($rtoi(sr / m2 * 33554432.0));
      pim[i] = int'($rtoi(si / m2 * 33554432.0));
    end
    ys_r = new[NS]; ys_i = new[NS];
    q = new[2*NS];
    foreach (ys_r[i]) begin
      int k, u, hr, hi;
      ys_r[i] = int'($urandom_range(32'h6000000)) - 32'h3000000;
      ys_i[i] = int'($urandom_range(32'h6000000)) - 32'h3000000;
      k = i / W; u = (i % W) % N_UE;
      hr = sat32(longint'(fmul(ys_r[i], pr[k*N_UE+u])) + longint'(fmul(ys_i[i], pim[k*N_UE+u])));
      hi = sat32(longint'(fmul(ys_i[i], pr[k*N_UE+u])) - longint'(fmul(ys_r[i], pim[k*N_UE+u])));
      q[2*i]   = rq(hr, inq_mult, inq_shift, inq_zp);
      q[2*i+1] = rq(hi, inq_mult, inq_shift, inq_zp);
    end
    conv3(H, W, c_in, q, cur);
    for (int s = 0; s < 4; s++) begin
      conv3(H, W, c_a[s], cur, t1);
      relu(c_a[s].zpo, t1, t2);
      conv3(H, W, c_b[s], t2, t3);
      attention(att[s], lut, t3, cur, cur);
    end
    conv3(H, W, c_out, cur, t1);
    conv1(H*W, c_up, t1, t2);
    shuffle(H, W, 4, 2, t2, t3);
    exp_out = new[t3.size()];
    foreach (t3[i]) exp_out[i] = dq(t3[i], outq_zp, outq_scale);
  endtask

  // ---------------------------------------------------------------- config
  task automatic cfg(input int unit, input int off, input int data);
    @(negedge clk);
    cfg_we = 1; cfg_addr = 21'((unit << 16) | off); cfg_wdata = data;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic load_conv(input int unit, conv_layer l);
    foreach (l.w[i]) cfg(unit, i, l.w[i]);
    for (int fo = 0; fo < l.fout; fo++) begin
      cfg(unit, (1 << 13) | fo, l.bias[fo]);
      cfg(unit, (2 << 13) | fo, l.mult[fo]);
      cfg(unit, (3 << 13) | fo, l.shift[fo]);
    end
    cfg(unit, 4 << 13, (l.zpo << 8) | l.zpi);
  endtask

  task automatic load_all();
    foreach (pr[i]) begin
      cfg(0, 2*i, pr[i]);
      cfg(0, 2*i + 1, pim[i]);
    end
    cfg(1, 0, inq_mult); cfg(1, 1, inq_shift); cfg(1, 2, inq_zp);
    load_conv(2, c_in);
    for (int s = 0; s < 4; s++) begin
      load_conv(3 + 3*s, c_a[s]);
      load_conv(4 + 3*s, c_b[s]);
      foreach (lut[i]) cfg(5 + 3*s, i, lut[i]);
      cfg(5 + 3*s, (1 << 13) | 0, att[s].scale_h);
      cfg(5 + 3*s, (1 << 13) | 1, att[s].zp_h);
      cfg(5 + 3*s, (1 << 13) | 2, att[s].scale_x);
      cfg(5 + 3*s, (1 << 13) | 3, att[s].zp_x);
      cfg(5 + 3*s, (1 << 13) | 4, att[s].mult);
      cfg(5 + 3*s, (1 << 13) | 5, att[s].shift);
      cfg(5 + 3*s, (1 << 13) | 6, att[s].zp);
    end
    load_conv(15, c_out);
    load_conv(16, c_up);
    cfg(17, 0, outq_scale);
    cfg(17, 1, outq_zp);
  endtask

  // ---------------------------------------------------------------- checking
  int nout = 0, n_last = 0;
  int cnt_in_stall = 0, cnt_out_stall = 0, cnt_bypass = 0, cnt_relu_clamp = 0;
  int cnt_ps_overlap = 0, bypass_max = 0;
  longint t_first_in = -1, t_last_out = 0;
  longint t_tlast [NF];

  always @(negedge clk) begin
    m_axis_tready = free_run || ($urandom_range(3) != 0);
    #1;
    if (s_axis_tvalid && !s_axis_tready) cnt_in_stall++;
    if (m_axis_tvalid && !m_axis_tready) cnt_out_stall++;
    if (dut.g_spab[0].u_spab.u_bypass.count > 0) cnt_bypass++;
    if (int'(dut.g_spab[0].u_spab.u_bypass.count) > bypass_max)
      bypass_max = int'(dut.g_spab[0].u_spab.u_bypass.count);
    if (dut.g_spab[0].u_spab.u_relu.s_valid && dut.g_spab[0].u_spab.u_relu.s_ready &&
        dut.g_spab[0].u_spab.u_relu.s_data < dut.g_spab[0].u_spab.u_relu.zp) cnt_relu_clamp++;
    if (dut.u_shuffle.s_valid && dut.u_shuffle.s_ready &&
        dut.u_shuffle.m_valid && dut.u_shuffle.m_ready) cnt_ps_overlap++;
    if (m_axis_tvalid && m_axis_tready) begin
      int e;
      e = exp_out[nout % NOUT];
      checks++;
      if (int'(m_axis_tdata) != e) begin
        failures++;
        if (failures < 10) $display("out %0d: got %0d exp %0d", nout, int'(m_axis_tdata), e);
      end
      checks++;
      if (m_axis_tlast != ((nout % NOUT) == NOUT - 1)) begin
        failures++;
        $display("out %0d: tlast %0d", nout, m_axis_tlast);
      end
      if (m_axis_tlast) begin
        if (n_last < NF) t_tlast[n_last] = $time / 10;
        n_last++;
      end
      nout++;
      t_last_out = $time / 10;
    end
  end

  task automatic send_frame(input bit gaps);
    for (int i = 0; i < NS; i++) begin
      @(negedge clk);
      while (gaps && $urandom_range(3) == 0) @(negedge clk);
      s_axis_tvalid = 1;
      s_axis_tdata = {32'(ys_i[i]), 32'(ys_r[i])};
      if (t_first_in < 0) t_first_in = $time / 10;
      #2;
      while (!s_axis_tready) begin @(negedge clk); #2; end
      @(posedge clk);
      #1 s_axis_tvalid = 0;
    end
  endtask

  initial begin
    longint lat, period;
    build_model();
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_all();
    // NF frames back to back at full rate, timed.
    free_run = 1;
    t_first_in = -1;
    for (int f = 0; f < NF; f++) send_frame(0);
    wait (nout == NF * NOUT);
    lat = t_tlast[0] - t_first_in + 1;
    $display("full-rate frame: %0d cycles from first input to last output (%0d outputs)", lat, NOUT);
    checks++;
    if (lat > 200000) begin
      failures++;
      $display("frame exceeds 1 ms at 200 MHz");
    end
    period = t_tlast[NF-1] - t_tlast[NF-2];
    $display("frame period: %0d cycles between the last outputs of consecutive frames", period);
    checks++;
    if (period > 176678) begin
      failures++;
      $display("fewer than 1132 frames/s at 200 MHz");
    end
    repeat (50) @(posedge clk);
    checks++;
    if (nout != NF * NOUT) failures++;
    $display("mechanisms: in_stall=%0d out_stall=%0d bypass_busy=%0d bypass_max=%0d relu_clamp=%0d ps_overlap=%0d tlast=%0d frames=%0d",
             cnt_in_stall, cnt_out_stall, cnt_bypass, bypass_max, cnt_relu_clamp, cnt_ps_overlap, n_last, NF);
    checks += 5;
    if (cnt_in_stall == 0)   begin failures++; $display("no input stall seen"); end
    if (cnt_bypass == 0)     begin failures++; $display("bypass buffer never used"); end
    if (cnt_relu_clamp == 0) begin failures++; $display("ReLU never clamped"); end
    if (cnt_ps_overlap == 0) begin failures++; $display("no pixel-shuffle pass-through"); end
    if (n_last != NF)        begin failures++; $display("tlast count %0d", n_last); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
