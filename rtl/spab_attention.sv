// spab_attention: parameter-free attention at the end of a SPAB.
//
// Computes O = sigma_a(H) * (H + X) element by element, where H is the output
// of the SPAB's second convolution, X the SPAB input taken from the bypass
// buffer and sigma_a(x) = sigmoid(x) - 0.5. Both UINT8 operands are first
// de-quantised to FIX32, (q - zp) * scale. sigma_a comes from a 512-entry
// FIX32 look-up table covering (-3, 3): entry i holds the value for the
// interval [-3 + 6i/512, -3 + 6(i+1)/512); inputs at or beyond the ends use
// the first or last entry. The index is floor((h + 3) * 512/6), computed
// exactly as a multiply by a reciprocal constant. The FIX32 sum is multiplied
// by the table value and the product re-quantised to UINT8 (sc_pkg::requant).
// The table contents and all scales are written through the configuration
// port; the table size, its range and the FIX32 arithmetic follow the paper,
// the index formula and the register map are this design's choice.
//
// Configuration offsets: region cfg_addr[15:13] = 0: table entry
// cfg_addr[8:0]; region 1: cfg_addr[2:0] = 0 scale_h, 1 zp_h, 2 scale_x,
// 3 zp_x, 4 mult_out, 5 shift_out, 6 zp_out.
//
// Timing: two pipeline stages (de-quantise/look-up/add, then multiply/
// re-quantise), one element per cycle. h_* and x_* are joined: an element is
// taken when both are valid.
module spab_attention
  import sc_pkg::*;
#(
  parameter int LUT_N = 512
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_we,
  input  logic [15:0] cfg_addr,
  input  logic [31:0] cfg_wdata,
  input  logic        h_valid,
  output logic        h_ready,
  input  u8_t         h_data,
  input  logic        x_valid,
  output logic        x_ready,
  input  u8_t         x_data,
  output logic        m_valid,
  input  logic        m_ready,
  output u8_t         m_data
);
  localparam int LW = $clog2(LUT_N);
  // floor(t / (6*2^25/512)) = floor(t / 393216) = (t * RECIP) >> 47 for 0 <= t < 2^28.
  localparam longint RECIP = 64'd357913942;

  fix32_t lut [LUT_N];
  fix32_t scale_h, scale_x;
  u8_t    zp_h, zp_x, zp_o;
  logic signed [31:0] mult_o;
  logic [5:0]         shift_o;

  always_ff @(posedge clk) begin
    if (cfg_we) begin
      if (cfg_addr[15:13] == 3'd0) begin
        if (32'(cfg_addr[12:0]) < LUT_N) lut[cfg_addr[LW-1:0]] <= cfg_wdata;
      end else if (cfg_addr[15:13] == 3'd1) begin
        case (cfg_addr[2:0])
          3'd0: scale_h <= cfg_wdata;
          3'd1: zp_h    <= cfg_wdata[7:0];
          3'd2: scale_x <= cfg_wdata;
          3'd3: zp_x    <= cfg_wdata[7:0];
          3'd4: mult_o  <= cfg_wdata;
          3'd5: shift_o <= cfg_wdata[5:0];
          3'd6: zp_o    <= cfg_wdata[7:0];
          default: ;
        endcase
      end
    end
  end

  // Stage 1: de-quantise, table index and look-up, residual sum.
  fix32_t hf, xf;
  logic signed [33:0] t;
  logic [63:0]        tprod;
  logic [LW-1:0]      idx;
  assign hf    = dequant(h_data, zp_h, scale_h);
  assign xf    = dequant(x_data, zp_x, scale_x);
  assign t     = 34'(hf) + 34'sd100663296;           // h + 3.0
  assign tprod = 64'(t[27:0]) * RECIP;
  always_comb begin
    if (t < 0)                          idx = '0;
    else if (t >= 34'sd201326592)       idx = LW'(LUT_N - 1);   // h >= 3.0
    else                                idx = tprod[47 +: LW];
  end

  logic   s1_valid, s1_ready, take;
  fix32_t s1_att, s1_sum;

  assign take    = h_valid && x_valid && s1_ready;
  assign h_ready = take;
  assign x_ready = take;
  assign s1_ready = !s1_valid || !m_valid || m_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_att   <= '0;
      s1_sum   <= '0;
      m_valid  <= 1'b0;
      m_data   <= '0;
    end else begin
      // Stage 2: attention product and re-quantisation.
      if (!m_valid || m_ready) begin
        m_valid <= s1_valid;
        if (s1_valid) m_data <= requant(fix_mul(s1_att, s1_sum), mult_o, shift_o, zp_o);
      end
      if (s1_ready) begin
        s1_valid <= take;
        if (take) begin
          s1_att <= lut[idx];
          s1_sum <= fix_add(hf, xf);
        end
      end
    end
  end
endmodule
