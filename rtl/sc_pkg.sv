// sc_pkg: types, sizes and fixed-point helpers shared by the channel-estimation
// accelerator.
//
// Number formats. FIX32 is a signed 32-bit fixed-point number with 7 integer
// bits (sign included) and 25 fraction bits, the format used for LS estimates,
// de-quantised activations, the attention table and the final output. U8 is an
// unsigned 8-bit quantised activation, I8 a signed 8-bit weight, I32 a
// convolution accumulator.
//
// Quantisation follows x_q = round(x/scale) + zero_point. Re-quantisation of
// any 32-bit value v (an I32 accumulator or a FIX32 number) is done with an
// integer multiplier and a right shift: q = sat_u8(round(v*mult / 2^shift) + zp),
// so the real factor scale_x*scale_w/scale_z (or 2^-25/scale) is mult/2^shift.
// This multiplier/shift form is this design's choice; the formats and the
// zero-point arithmetic are those of the paper.
//
// Configuration address map (cfg_addr = {unit[4:0], offset[15:0]}): every
// parameter memory is written through one 32-bit write port. The unit numbers
// are listed below; the offset map of each unit is given in the module that
// owns it.
package sc_pkg;

  localparam int FIX_FRAC = 25;        // FIX32 fraction bits

  typedef logic signed [31:0] fix32_t;
  typedef logic        [7:0]  u8_t;
  typedef logic signed [7:0]  i8_t;
  typedef logic signed [31:0] i32_t;
  typedef logic signed [8:0]  shifted_t;  // x_q - zero_point, range -255..255

  // Parameter-memory regions inside a convolution engine (cfg offset[15:13]).
  typedef enum logic [2:0] {
    REG_WEIGHT = 3'd0,   // offset[12:0] = (fo*FIN + fi)*K*K + rr*K + cc, data[7:0]
    REG_BIAS   = 3'd1,   // offset[12:0] = fo, data = I32 bias
    REG_MULT   = 3'd2,   // offset[12:0] = fo, data = re-quantisation multiplier
    REG_SHIFT  = 3'd3,   // offset[12:0] = fo, data[5:0] = right shift
    REG_ZP     = 3'd4    // data[7:0] = input zero point, data[15:8] = output zero point
  } conv_region_e;

  // Configuration units (cfg_addr[20:16]).
  typedef enum logic [4:0] {
    UNIT_LS       = 5'd0,   // pilot table
    UNIT_INQ      = 5'd1,   // input quantiser
    UNIT_CONV_IN  = 5'd2,   // first QCONV3 (2 -> 12)
    UNIT_SPAB0    = 5'd3,   // SPAB s: 3+3s conv_a, 4+3s conv_b, 5+3s attention
    UNIT_CONV_OUT = 5'd15,  // last QCONV3 (12 -> 4)
    UNIT_CONV1    = 5'd16,  // QCONV1 (4 -> 32)
    UNIT_OUTQ     = 5'd17   // output de-quantiser
  } cfg_unit_e;

  // Round-to-nearest re-quantisation of a 32-bit value to U8.
  function automatic u8_t requant(input logic signed [31:0] v,
                                  input logic signed [31:0] mult,
                                  input logic [5:0] shift,
                                  input u8_t zp);
    logic signed [63:0] prod;
    logic signed [63:0] rnd;
    logic signed [63:0] q;
    prod = 64'(v) * 64'(mult);
    rnd  = (shift == 6'd0) ? 64'sd0 : (64'sd1 <<< (shift - 6'd1));
    q    = ((prod + rnd) >>> shift) + 64'($signed({1'b0, zp}));
    if (q < 0)        return 8'd0;
    else if (q > 255) return 8'd255;
    else              return q[7:0];
  endfunction

  // De-quantisation of a U8 value to FIX32: (x - zp) * scale, scale in FIX32.
  function automatic fix32_t dequant(input u8_t x, input u8_t zp, input fix32_t scale);
    logic signed [9:0]  d;
    logic signed [41:0] p;
    d = $signed({2'b00, x}) - $signed({2'b00, zp});
    p = 42'(d) * 42'(scale);
    if (p > 42'sh0_7FFF_FFFF)        return 32'sh7FFF_FFFF;
    else if (p < -42'sh0_8000_0000)  return 32'sh8000_0000;
    else                             return p[31:0];
  endfunction

  // Saturating FIX32 product (a*b with the 25 fraction bits re-aligned).
  function automatic fix32_t fix_mul(input fix32_t a, input fix32_t b);
    logic signed [63:0] p;
    p = (64'(a) * 64'(b)) >>> FIX_FRAC;
    if (p > 64'sh7FFF_FFFF)        return 32'sh7FFF_FFFF;
    else if (p < -64'sh8000_0000)  return 32'sh8000_0000;
    else                           return p[31:0];
  endfunction

  // Saturating FIX32 sum.
  function automatic fix32_t fix_add(input fix32_t a, input fix32_t b);
    logic signed [32:0] s;
    s = 33'(a) + 33'(b);
    if (s > 33'sh0_7FFF_FFFF)        return 32'sh7FFF_FFFF;
    else if (s < -33'sh0_8000_0000)  return 32'sh8000_0000;
    else                             return s[31:0];
  endfunction

  // Saturating FIX32 difference a - b.
  function automatic fix32_t fix_sub(input fix32_t a, input fix32_t b);
    logic signed [32:0] s;
    s = 33'(a) - 33'(b);
    if (s > 33'sh0_7FFF_FFFF)        return 32'sh7FFF_FFFF;
    else if (s < -33'sh0_8000_0000)  return 32'sh8000_0000;
    else                             return s[31:0];
  endfunction

endpackage
