// swiftchannel_top: streaming accelerator for deep-learning channel estimation.
//
// Takes the received sounding-reference (pilot) samples of one SRS symbol and
// returns the full-resolution channel matrix. The data path is a chain of
// streaming blocks joined by small FIFOs, each block starting as soon as its
// input is available, so the blocks of consecutive rows overlap and the total
// time is set by the slowest block:
//
//   s_axis (complex FIX32 pilots, N_K x N_R*N_UE)
//   -> ls_estimator          H_LS = y * conj(s)/|s|^2
//   -> scale_shift_input     FIX32 -> UINT8, 2 channels (Re, Im)
//   -> qconv3_engine  2->12  first 3x3 convolution
//   -> 4 x spab      12->8->12 with parameter-free attention
//   -> qconv3_engine 12->4   last 3x3 convolution
//   -> qconv1_engine  4->32  1x1 up-sampling convolution
//   -> pixel_shuffle         r = 4 in both dimensions, 32 -> 2 channels
//   -> output_dequant        UINT8 -> FIX32, TLAST on the last value
//   -> m_axis (FIX32, (4*N_K) x (4*N_R*N_UE) x 2, depth-first)
//
// At the default sizes the input is 108 x 32 complex samples and the output
// 432 x 128 x 2 values. The layer sizes and tile factors are those of the
// paper's student network and accelerator; the stream protocol, orders and
// configuration port are this design's choices.
//
// Interface. s_axis_*: one complex sample {Im, Re} per transfer, subcarrier
// major. m_axis_*: one FIX32 value per transfer, m_axis_tlast on the last
// value of a frame. cfg_*: write port for all on-chip parameter memories
// (weights, biases, scales, zero points, pilot table, attention table),
// cfg_addr = {unit[4:0], offset[15:0]} with the units of sc_pkg; in a system
// this port is driven by the host processor before frames are sent.
module swiftchannel_top
  import sc_pkg::*;
#(
  parameter int N_K    = 108,  // pilot subcarriers (height of the LS estimate)
  parameter int N_R    = 16,   // active receive antennas
  parameter int N_UE   = 2,    // UE antennas
  parameter int C      = 12,   // SPAB feature channels
  parameter int MID    = 8,    // SPAB inner channels
  parameter int C_LAST = 4,    // channels after the last 3x3 convolution
  parameter int R      = 4,    // up-scaling factor in both dimensions
  parameter int C_OUT  = 2,    // output channels (Re, Im)
  parameter int N_SPAB = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_we,
  input  logic [20:0] cfg_addr,
  input  logic [31:0] cfg_wdata,
  input  logic        s_axis_tvalid,
  output logic        s_axis_tready,
  input  logic [63:0] s_axis_tdata,
  output logic        m_axis_tvalid,
  input  logic        m_axis_tready,
  output logic [31:0] m_axis_tdata,
  output logic        m_axis_tlast
);
  localparam int H     = N_K;
  localparam int W     = N_R * N_UE;
  localparam int C_UP  = C_OUT * R * R;

  logic [4:0]  unit;
  logic [15:0] off;
  assign unit = cfg_addr[20:16];
  assign off  = cfg_addr[15:0];

  // LS estimator and input quantiser.
  logic        ls_valid, ls_ready;
  logic [63:0] ls_data;
  logic        q_valid, q_ready, qf_valid, qf_ready;
  u8_t         q_data, qf_data;

  ls_estimator #(.N_K(N_K), .N_R(N_R), .N_UE(N_UE)) u_ls (
    .clk, .rst_n, .cfg_we(cfg_we && unit == UNIT_LS), .cfg_addr(off), .cfg_wdata,
    .s_valid(s_axis_tvalid), .s_ready(s_axis_tready), .s_data(s_axis_tdata),
    .m_valid(ls_valid), .m_ready(ls_ready), .m_data(ls_data)
  );

  scale_shift_input u_inq (
    .clk, .rst_n, .cfg_we(cfg_we && unit == UNIT_INQ), .cfg_addr(off), .cfg_wdata,
    .s_valid(ls_valid), .s_ready(ls_ready), .s_data(ls_data),
    .m_valid(q_valid), .m_ready(q_ready), .m_data(q_data)
  );

  stream_fifo #(.W(8), .DEPTH(2)) u_fifo_q (
    .clk, .rst_n, .s_valid(q_valid), .s_ready(q_ready), .s_data(q_data),
    .m_valid(qf_valid), .m_ready(qf_ready), .m_data(qf_data)
  );

  // First convolution, 2 -> C (tiles TM=4, TN=2).
  logic sp_valid [N_SPAB+1];
  logic sp_ready [N_SPAB+1];
  u8_t  sp_data  [N_SPAB+1];
  logic c0_valid, c0_ready;
  u8_t  c0_data;

  qconv3_engine #(.H(H), .W(W), .FIN(2), .FOUT(C), .TM(4), .TN(2)) u_conv_in (
    .clk, .rst_n, .cfg_we(cfg_we && unit == UNIT_CONV_IN), .cfg_addr(off), .cfg_wdata,
    .zp_out(),
    .s_valid(qf_valid), .s_ready(qf_ready), .s_data(qf_data),
    .m_valid(c0_valid), .m_ready(c0_ready), .m_data(c0_data)
  );

  stream_fifo #(.W(8), .DEPTH(2)) u_fifo_c0 (
    .clk, .rst_n, .s_valid(c0_valid), .s_ready(c0_ready), .s_data(c0_data),
    .m_valid(sp_valid[0]), .m_ready(sp_ready[0]), .m_data(sp_data[0])
  );

  // SPAB chain.
  for (genvar s = 0; s < N_SPAB; s++) begin : g_spab
    logic       o_valid, o_ready;
    u8_t        o_data;
    logic [4:0] base;
    logic [1:0] rel;
    logic       hit;
    assign base = 5'(32'(UNIT_SPAB0) + 3*s);
    assign rel  = 2'(unit - base);
    assign hit  = cfg_we && (unit >= base) && (unit < base + 5'd3);

    spab #(.H(H), .W(W), .C(C), .MID(MID), .TM(4), .TN(4)) u_spab (
      .clk, .rst_n, .cfg_we(hit), .cfg_sub(rel), .cfg_addr(off), .cfg_wdata,
      .s_valid(sp_valid[s]), .s_ready(sp_ready[s]), .s_data(sp_data[s]),
      .m_valid(o_valid), .m_ready(o_ready), .m_data(o_data)
    );

    stream_fifo #(.W(8), .DEPTH(2)) u_fifo (
      .clk, .rst_n, .s_valid(o_valid), .s_ready(o_ready), .s_data(o_data),
      .m_valid(sp_valid[s+1]), .m_ready(sp_ready[s+1]), .m_data(sp_data[s+1])
    );
  end

  // Last convolution, C -> C_LAST (tiles TM=4, TN=4).
  logic cl_valid, cl_ready, clf_valid, clf_ready;
  u8_t  cl_data, clf_data;

  qconv3_engine #(.H(H), .W(W), .FIN(C), .FOUT(C_LAST), .TM(4), .TN(4)) u_conv_out (
    .clk, .rst_n, .cfg_we(cfg_we && unit == UNIT_CONV_OUT), .cfg_addr(off), .cfg_wdata,
    .zp_out(),
    .s_valid(sp_valid[N_SPAB]), .s_ready(sp_ready[N_SPAB]), .s_data(sp_data[N_SPAB]),
    .m_valid(cl_valid), .m_ready(cl_ready), .m_data(cl_data)
  );

  stream_fifo #(.W(8), .DEPTH(2)) u_fifo_cl (
    .clk, .rst_n, .s_valid(cl_valid), .s_ready(cl_ready), .s_data(cl_data),
    .m_valid(clf_valid), .m_ready(clf_ready), .m_data(clf_data)
  );

  // Up-sampling 1x1 convolution, C_LAST -> C_OUT*R*R.
  logic up_valid, up_ready, upf_valid, upf_ready;
  u8_t  up_data, upf_data;

  qconv1_engine #(.FIN(C_LAST), .FOUT(C_UP)) u_conv1 (
    .clk, .rst_n, .cfg_we(cfg_we && unit == UNIT_CONV1), .cfg_addr(off), .cfg_wdata,
    .s_valid(clf_valid), .s_ready(clf_ready), .s_data(clf_data),
    .m_valid(up_valid), .m_ready(up_ready), .m_data(up_data)
  );

  stream_fifo #(.W(8), .DEPTH(2)) u_fifo_up (
    .clk, .rst_n, .s_valid(up_valid), .s_ready(up_ready), .s_data(up_data),
    .m_valid(upf_valid), .m_ready(upf_ready), .m_data(upf_data)
  );

  // Pixel shuffle and output de-quantiser.
  logic ps_valid, ps_ready;
  u8_t  ps_data;

  pixel_shuffle #(.W(W), .R(R), .COUT(C_OUT)) u_shuffle (
    .clk, .rst_n,
    .s_valid(upf_valid), .s_ready(upf_ready), .s_data(upf_data),
    .m_valid(ps_valid), .m_ready(ps_ready), .m_data(ps_data)
  );

  output_dequant #(.FRAME_N(H * W * C_UP)) u_outq (
    .clk, .rst_n, .cfg_we(cfg_we && unit == UNIT_OUTQ), .cfg_addr(off), .cfg_wdata,
    .s_valid(ps_valid), .s_ready(ps_ready), .s_data(ps_data),
    .m_valid(m_axis_tvalid), .m_ready(m_axis_tready), .m_data(m_axis_tdata),
    .m_last(m_axis_tlast)
  );
endmodule
