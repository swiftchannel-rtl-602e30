// qconv3_engine: quantised 3x3 convolution engine (stride 1, zero padding 1).
//
// Reads a UINT8 feature map of H x W x FIN in depth-first order and writes the
// UINT8 feature map H x W x FOUT in the same order. It is the paper's QCONV3
// engine: window3d builds the shifted 3x3xFIN windows from a line buffer,
// filter3d multiplies them with the INT8 weights in TM x TN tiles, adds the
// INT32 biases and re-quantises. The on-chip parameter memory (weights,
// biases, per-channel re-quantisation multipliers and shifts, input and
// output zero points) lives here and is written through the configuration
// port; in the paper it is filled before operation, how is not described, so
// the write port is this design's choice.
//
// Configuration offsets (cfg_addr[15:13] = region, see sc_pkg::conv_region_e):
//   0 weights, offset[12:0] = (fo*FIN + fi)*9 + rr*3 + cc, data[7:0] (I8)
//   1 bias[fo] (I32)   2 mult[fo]   3 shift[fo] (data[5:0])
//   4 zero points: data[7:0] input, data[15:8] output
// zp_out is also given out, for the ReLU that follows the first engine of a
// SPAB.
//
// Timing: one input value per cycle; a window is filtered in
// (FOUT/TM)*(FIN/TN) cycles and written out at one value per cycle.
module qconv3_engine
  import sc_pkg::*;
#(
  parameter int H    = 108,
  parameter int W    = 32,
  parameter int FIN  = 12,
  parameter int FOUT = 8,
  parameter int TM   = 4,
  parameter int TN   = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_we,
  input  logic [15:0] cfg_addr,
  input  logic [31:0] cfg_wdata,
  output u8_t         zp_out,
  input  logic        s_valid,
  output logic        s_ready,
  input  u8_t         s_data,
  output logic        m_valid,
  input  logic        m_ready,
  output u8_t         m_data
);
  localparam int NWGT = FOUT * FIN * 9;
  localparam int FW   = (FOUT > 1) ? $clog2(FOUT) : 1;

  i8_t               wmem  [NWGT];
  i8_t               wgt   [FOUT][FIN][3][3];
  i32_t              bias  [FOUT];
  logic signed [31:0] mult [FOUT];
  logic [5:0]        shift [FOUT];
  u8_t               zp_in, zp_out_q;

  conv_region_e region;
  logic [12:0]  idx;
  assign region = conv_region_e'(cfg_addr[15:13]);
  assign idx    = cfg_addr[12:0];

  always_ff @(posedge clk) begin
    if (cfg_we) begin
      case (region)
        REG_WEIGHT: if (32'(idx) < NWGT) wmem[idx[$clog2(NWGT)-1:0]] <= cfg_wdata[7:0];
        REG_BIAS:  if (32'(idx) < FOUT) bias[idx[FW-1:0]]  <= cfg_wdata;
        REG_MULT:  if (32'(idx) < FOUT) mult[idx[FW-1:0]]  <= cfg_wdata;
        REG_SHIFT: if (32'(idx) < FOUT) shift[idx[FW-1:0]] <= cfg_wdata[5:0];
        REG_ZP: begin
          zp_in    <= cfg_wdata[7:0];
          zp_out_q <= cfg_wdata[15:8];
        end
        default: ;
      endcase
    end
  end
  assign zp_out = zp_out_q;

  always_comb begin
    for (int fo = 0; fo < FOUT; fo++)
      for (int fi = 0; fi < FIN; fi++)
        for (int k = 0; k < 9; k++)
          wgt[fo][fi][k/3][k%3] = wmem[(fo*FIN + fi)*9 + k];
  end

  logic     w_valid, w_ready;
  shifted_t win [FIN][3][3];

  window3d #(.H(H), .W(W), .FIN(FIN)) u_window (
    .clk, .rst_n, .zp(zp_in),
    .s_valid, .s_ready, .s_data,
    .m_valid(w_valid), .m_ready(w_ready), .m_win(win)
  );

  filter3d #(.FIN(FIN), .FOUT(FOUT), .TM(TM), .TN(TN)) u_filter (
    .clk, .rst_n, .wgt, .bias, .mult, .shift, .zp_out(zp_out_q),
    .s_valid(w_valid), .s_ready(w_ready), .s_win(win),
    .m_valid, .m_ready, .m_data
  );
endmodule
