// scale_shift_input: quantises the FIX32 LS estimate to the UINT8 stream that
// the first convolution engine reads.
//
// Each complex LS value {Im, Re} becomes two pixels of a two-channel feature
// map, real part first (channel 0) and imaginary part second (channel 1), which
// is the depth-first (channel-fastest) order all feature-map streams use.
// Quantisation is x_q = round(x/scale) + zero_point, done as
// requant(x, mult, shift, zp) with mult/2^shift = 2^-25/scale (see sc_pkg);
// one scale and zero point for the whole tensor (this design's choice; the
// paper only says the block scales and shifts FIX32 to UINT8).
//
// Interface: s_* takes {Im, Re} FIX32 words, m_* gives one U8 per cycle, so a
// complex sample takes two cycles. Registers (cfg unit 1): offset 0 = mult,
// 1 = shift, 2 = zero point.
module scale_shift_input
  import sc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_we,
  input  logic [15:0] cfg_addr,
  input  logic [31:0] cfg_wdata,
  input  logic        s_valid,
  output logic        s_ready,
  input  logic [63:0] s_data,
  output logic        m_valid,
  input  logic        m_ready,
  output logic [7:0]  m_data
);
  logic signed [31:0] mult_q;
  logic [5:0]         shift_q;
  u8_t                zp_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mult_q  <= 32'sd1;
      shift_q <= '0;
      zp_q    <= '0;
    end else if (cfg_we) begin
      case (cfg_addr)
        16'd0:   mult_q  <= cfg_wdata;
        16'd1:   shift_q <= cfg_wdata[5:0];
        16'd2:   zp_q    <= cfg_wdata[7:0];
        default: ;
      endcase
    end
  end

  // Two quantised channels held; sel_q says which one is on the output.
  u8_t  q_re, q_im;
  logic full_q, sel_q;

  assign s_ready = !full_q || (sel_q && m_ready);
  assign m_valid = full_q;
  assign m_data  = sel_q ? q_im : q_re;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full_q <= 1'b0;
      sel_q  <= 1'b0;
      q_re   <= '0;
      q_im   <= '0;
    end else begin
      if (s_valid && s_ready) begin
        q_re   <= requant(s_data[31:0],  mult_q, shift_q, zp_q);
        q_im   <= requant(s_data[63:32], mult_q, shift_q, zp_q);
        full_q <= 1'b1;
        sel_q  <= 1'b0;
      end else if (full_q && m_ready) begin
        if (sel_q) full_q <= 1'b0;
        sel_q <= !sel_q;
      end
    end
  end
endmodule
