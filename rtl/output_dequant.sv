// output_dequant: converts the UINT8 output stream back to FIX32.
//
// y = (x_q - zp) * scale, one value per cycle through one register stage, with
// a single per-tensor scale (FIX32) and zero point. The block also counts the
// values of a frame and raises m_last on the final one, so that the output
// stream can end a DMA transfer (AXI-Stream TLAST); the frame length is
// FRAME_N = (R*H) * (R*W) * COUT = 432*128*2 at the default sizes.
// Configuration (cfg unit 17): offset 0 = scale (FIX32), 1 = zero point.
module output_dequant
  import sc_pkg::*;
#(
  parameter int FRAME_N = 110592
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
  output fix32_t      m_data,
  output logic        m_last
);
  localparam int NW = $clog2(FRAME_N);

  fix32_t        scale_q;
  u8_t           zp_q;
  logic [NW-1:0] n_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      scale_q <= fix32_t'(1) <<< FIX_FRAC;
      zp_q    <= '0;
    end else if (cfg_we) begin
      if (cfg_addr == 16'd0) scale_q <= cfg_wdata;
      if (cfg_addr == 16'd1) zp_q    <= cfg_wdata[7:0];
    end
  end

  assign s_ready = !m_valid || m_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_valid <= 1'b0;
      m_data  <= '0;
      m_last  <= 1'b0;
      n_q     <= '0;
    end else if (s_ready) begin
      m_valid <= s_valid;
      if (s_valid) begin
        m_data <= dequant(s_data, zp_q, scale_q);
        m_last <= (n_q == NW'(FRAME_N-1));
        n_q    <= (n_q == NW'(FRAME_N-1)) ? '0 : n_q + 1'b1;
      end
    end
  end
endmodule
