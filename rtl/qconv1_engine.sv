// qconv1_engine: quantised 1x1 convolution (the up-sampling layer, 4 -> 32).
//
// Reads a UINT8 stream of pixels with FIN channels (depth-first order). Each
// value is shifted by the input zero point ("shift input") as it arrives and
// stored in a pixel register. When the FIN values of a pixel are in, the PE
// array forms all FOUT sums in one cycle, bias + sum_fi x_s[fi]*w[fo][fi]
// (FOUT*FIN multipliers), and the sums are written out one channel per cycle
// after per-channel scale and shift (sc_pkg::requant). The next pixel is
// collected while the previous one is written out, so a pixel costs
// max(FIN, FOUT) cycles. The paper shows the shift-input, PE-array and
// scale-and-shift stages of this engine but not their sizing; computing all
// FOUT outputs at once is this design's choice.
//
// Configuration offsets: as qconv3_engine, with weight offset fo*FIN + fi.
module qconv1_engine
  import sc_pkg::*;
#(
  parameter int FIN  = 4,
  parameter int FOUT = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_we,
  input  logic [15:0] cfg_addr,
  input  logic [31:0] cfg_wdata,
  input  logic        s_valid,
  output logic        s_ready,
  input  u8_t         s_data,
  output logic        m_valid,
  input  logic        m_ready,
  output u8_t         m_data
);
  localparam int CW  = (FIN > 1) ? $clog2(FIN) : 1;
  localparam int FOW = (FOUT > 1) ? $clog2(FOUT) : 1;

  i8_t                wgt   [FOUT*FIN];
  i32_t               bias  [FOUT];
  logic signed [31:0] mult  [FOUT];
  logic [5:0]         shift [FOUT];
  u8_t                zp_in, zp_out;

  conv_region_e region;
  logic [12:0]  idx;
  assign region = conv_region_e'(cfg_addr[15:13]);
  assign idx    = cfg_addr[12:0];

  always_ff @(posedge clk) begin
    if (cfg_we) begin
      case (region)
        REG_WEIGHT: if (32'(idx) < FOUT*FIN) wgt[idx[$clog2(FOUT*FIN)-1:0]] <= cfg_wdata[7:0];
        REG_BIAS:   if (32'(idx) < FOUT) bias[idx[FOW-1:0]]  <= cfg_wdata;
        REG_MULT:   if (32'(idx) < FOUT) mult[idx[FOW-1:0]]  <= cfg_wdata;
        REG_SHIFT:  if (32'(idx) < FOUT) shift[idx[FOW-1:0]] <= cfg_wdata[5:0];
        REG_ZP: begin
          zp_in  <= cfg_wdata[7:0];
          zp_out <= cfg_wdata[15:8];
        end
        default: ;
      endcase
    end
  end

  shifted_t       px [FIN];
  logic [CW-1:0]  ic_q;
  logic           full_q;      // px[] holds a complete pixel
  i32_t           out_sum [FOUT];
  i32_t           acc     [FOUT];
  logic           ser_q;
  logic [FOW-1:0] fo_q;
  logic           ser_last, fire;

  assign ser_last = ser_q && m_ready && (fo_q == FOW'(FOUT-1));
  assign fire     = full_q && (!ser_q || ser_last);
  assign s_ready  = !full_q || fire;

  // PE array: all output channels of one pixel.
  always_comb begin
    for (int fo = 0; fo < FOUT; fo++) begin
      acc[fo] = bias[fo];
      for (int fi = 0; fi < FIN; fi++)
        acc[fo] += 32'(px[fi]) * 32'(wgt[fo*FIN + fi]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ic_q   <= '0;
      full_q <= 1'b0;
      ser_q  <= 1'b0;
      fo_q   <= '0;
      for (int i = 0; i < FIN; i++)  px[i] <= '0;
      for (int i = 0; i < FOUT; i++) out_sum[i] <= '0;
    end else begin
      if (fire) begin
        for (int i = 0; i < FOUT; i++) out_sum[i] <= acc[i];
        ser_q  <= 1'b1;
        fo_q   <= '0;
        full_q <= 1'b0;
      end else if (ser_q && m_ready) begin
        if (fo_q == FOW'(FOUT-1)) ser_q <= 1'b0;
        fo_q <= fo_q + 1'b1;
      end

      if (s_valid && s_ready) begin
        px[ic_q] <= $signed({1'b0, s_data}) - $signed({1'b0, zp_in});
        if (ic_q == CW'(FIN-1)) begin
          ic_q   <= '0;
          full_q <= 1'b1;
        end else begin
          ic_q <= ic_q + 1'b1;
        end
      end
    end
  end

  assign m_valid = ser_q;
  assign m_data  = requant(out_sum[fo_q], mult[fo_q], shift[fo_q], zp_out);
endmodule
