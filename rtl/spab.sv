// spab: swift parameter-free attention block.
//
// out = sigma_a(H) * (H + X), H = conv_b(relu(conv_a(X))), on a UINT8 stream
// of H x W pixels with C channels (depth-first order). conv_a maps C -> MID
// channels and conv_b MID -> C channels, both 3x3 QCONV3 engines. As in the
// paper, the input stream is duplicated: one copy feeds the first engine, the
// other waits in a bypass FIFO (the "data buffer") until the matching element
// of the second engine's output arrives at the attention unit. Small stream
// FIFOs join the stages.
//
// The bypass FIFO must hold every element between the pixel being finished at
// the attention unit and the last pixel the two engines need to finish it:
// each 3x3 engine needs W+1 pixels ahead, so about (2W+3)*C elements, 804 at
// W=32, C=12. The depth (1024) is this design's choice; the paper only says
// the buffer is a block-RAM FIFO.
//
// Configuration: cfg_sub selects 0 conv_a, 1 conv_b, 2 attention unit; the
// offsets are those of qconv3_engine and spab_attention.
module spab
  import sc_pkg::*;
#(
  parameter int H            = 108,
  parameter int W            = 32,
  parameter int C            = 12,
  parameter int MID          = 8,
  parameter int TM           = 4,
  parameter int TN           = 4,
  parameter int BYPASS_DEPTH = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_we,
  input  logic [1:0]  cfg_sub,
  input  logic [15:0] cfg_addr,
  input  logic [31:0] cfg_wdata,
  input  logic        s_valid,
  output logic        s_ready,
  input  u8_t         s_data,
  output logic        m_valid,
  input  logic        m_ready,
  output u8_t         m_data
);
  // Input duplication: an element leaves only when both copies are taken.
  logic a_ready, byp_ready;
  assign s_ready = a_ready && byp_ready;

  logic a_valid, a_rdy, r_valid, r_ready, r2_valid, r2_ready;
  logic b_valid, b_ready, bq_valid, bq_ready;
  logic x_valid, x_ready;
  u8_t  a_data, r_data, r2_data, b_data, bq_data, x_data, zp_a;
  logic af_valid, af_ready;
  u8_t  af_data;

  qconv3_engine #(.H(H), .W(W), .FIN(C), .FOUT(MID), .TM(TM), .TN(TN)) u_conv_a (
    .clk, .rst_n,
    .cfg_we(cfg_we && cfg_sub == 2'd0), .cfg_addr, .cfg_wdata, .zp_out(zp_a),
    .s_valid(s_valid && byp_ready), .s_ready(a_ready), .s_data,
    .m_valid(a_valid), .m_ready(a_rdy), .m_data(a_data)
  );

  stream_fifo #(.W(8), .DEPTH(2)) u_fifo_a (
    .clk, .rst_n,
    .s_valid(a_valid), .s_ready(a_rdy), .s_data(a_data),
    .m_valid(af_valid), .m_ready(af_ready), .m_data(af_data)
  );

  relu_stream u_relu (
    .clk, .rst_n, .zp(zp_a),
    .s_valid(af_valid), .s_ready(af_ready), .s_data(af_data),
    .m_valid(r_valid), .m_ready(r_ready), .m_data(r_data)
  );

  stream_fifo #(.W(8), .DEPTH(2)) u_fifo_r (
    .clk, .rst_n,
    .s_valid(r_valid), .s_ready(r_ready), .s_data(r_data),
    .m_valid(r2_valid), .m_ready(r2_ready), .m_data(r2_data)
  );

  qconv3_engine #(.H(H), .W(W), .FIN(MID), .FOUT(C), .TM(TM), .TN(TN)) u_conv_b (
    .clk, .rst_n,
    .cfg_we(cfg_we && cfg_sub == 2'd1), .cfg_addr, .cfg_wdata, .zp_out(),
    .s_valid(r2_valid), .s_ready(r2_ready), .s_data(r2_data),
    .m_valid(b_valid), .m_ready(b_ready), .m_data(b_data)
  );

  stream_fifo #(.W(8), .DEPTH(2)) u_fifo_b (
    .clk, .rst_n,
    .s_valid(b_valid), .s_ready(b_ready), .s_data(b_data),
    .m_valid(bq_valid), .m_ready(bq_ready), .m_data(bq_data)
  );

  stream_fifo #(.W(8), .DEPTH(BYPASS_DEPTH)) u_bypass (
    .clk, .rst_n,
    .s_valid(s_valid && a_ready), .s_ready(byp_ready), .s_data,
    .m_valid(x_valid), .m_ready(x_ready), .m_data(x_data)
  );

  spab_attention u_att (
    .clk, .rst_n,
    .cfg_we(cfg_we && cfg_sub == 2'd2), .cfg_addr, .cfg_wdata,
    .h_valid(bq_valid), .h_ready(bq_ready), .h_data(bq_data),
    .x_valid, .x_ready, .x_data,
    .m_valid, .m_ready, .m_data
  );
endmodule
