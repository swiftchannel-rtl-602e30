// relu_stream: ReLU on a quantised UINT8 stream.
//
// In the quantised domain the real value 0 is the zero point of the stream,
// so ReLU is y = max(x, zp): a value above the zero point passes unchanged,
// anything else becomes the zero point. zp is the output zero point of the
// convolution that produced the stream (the first QCONV3 of a SPAB). One
// register stage, one value per cycle, full valid/ready handshake.
module relu_stream
  import sc_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  u8_t  zp,
  input  logic s_valid,
  output logic s_ready,
  input  u8_t  s_data,
  output logic m_valid,
  input  logic m_ready,
  output u8_t  m_data
);
  assign s_ready = !m_valid || m_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_valid <= 1'b0;
      m_data  <= '0;
    end else if (s_ready) begin
      m_valid <= s_valid;
      if (s_valid) m_data <= (s_data > zp) ? s_data : zp;
    end
  end
endmodule
