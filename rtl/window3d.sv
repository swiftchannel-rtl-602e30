// window3d: sliding 3x3xFIN window generator of a QCONV3 engine.
//
// The input is a UINT8 feature map of H rows and W columns streamed in depth-
// first order (all FIN channels of a pixel, then the next pixel of the row,
// then the next row), one value per cycle. The output is one 3x3xFIN window
// per output pixel, centred on that pixel, in the same raster order, ready for
// the filter. As in the paper, two buffers are kept:
//   * a line buffer of whole rows; it holds the K-1 = 2 finished rows the
//     window needs plus the row now arriving (three row slots, row y in slot
//     y mod 3), written at the column and channel pointers of the input;
//   * a window buffer of 3x3xFIN values that shifts one column to the left for
//     every output pixel and takes the new right-hand column from the line
//     buffer (two columns at the start of a row).
// Values outside the map are zero padding; every value is shifted on its way
// into the window by the input zero point, x_s = x_q - zp, so padding is 0 in
// the shifted domain (the real-valued zero). The shifted values are kept as
// 9-bit signed numbers so that no U8 input can overflow (the paper labels them
// INT8; with a zero point inside 0..255 the difference needs 9 bits).
//
// Flow control: the window of pixel P is built once pixel P+W+1 is complete
// (or the frame's last pixel has arrived), and pixel P may be written only
// while it does not overwrite data still needed, P < next_window + 2W - 1.
// After a frame the block starts the next frame of the same size.
//
// Interface: s_valid/s_ready/s_data (U8), m_valid/m_ready/m_win. zp is the
// input zero point, held constant during a frame. Input runs at one value per
// cycle; a window is ready one cycle after its last needed value is written.
module window3d
  import sc_pkg::*;
#(
  parameter int H   = 108,
  parameter int W   = 32,
  parameter int FIN = 12
) (
  input  logic     clk,
  input  logic     rst_n,
  input  u8_t      zp,
  input  logic     s_valid,
  output logic     s_ready,
  input  u8_t      s_data,
  output logic     m_valid,
  input  logic     m_ready,
  output shifted_t m_win [FIN][3][3]   // [channel][row][column]
);
  localparam int NPIX = H * W;
  localparam int PW   = $clog2(NPIX + 1);
  localparam int CW   = (FIN > 1) ? $clog2(FIN) : 1;

  u8_t lb [3][W][FIN];

  // Input pointers.
  logic [CW-1:0]          ic_q;
  logic [$clog2(W)-1:0]   ix_q;
  logic [1:0]             islot_q;
  logic [PW-1:0]          in_pix_q;    // pixels fully written
  // Output pointers (next window to build).
  logic [$clog2(W)-1:0]   ox_q;
  logic [$clog2(H)-1:0]   oy_q;
  logic [PW-1:0]          out_pix_q;

  logic write_ok, can_build, build, take_in;

  assign write_ok  = (in_pix_q < PW'(NPIX)) &&
                     (32'(in_pix_q) < 32'(out_pix_q) + 2*W - 1);
  assign s_ready   = write_ok;
  assign take_in   = s_valid && s_ready;
  assign can_build = (out_pix_q < PW'(NPIX)) &&
                     ((32'(in_pix_q) >= 32'(out_pix_q) + W + 2) || (in_pix_q == PW'(NPIX)));
  assign build     = can_build && (!m_valid || m_ready);

  // One column of the window: rows oy-1..oy+1 at column col, shifted, padded.
  function automatic void fetch_col(input int col, output shifted_t c [FIN][3]);
    for (int r = 0; r < 3; r++) begin
      int row;
      row = int'(oy_q) - 1 + r;
      for (int f = 0; f < FIN; f++) begin
        if (row < 0 || row >= H || col >= W)
          c[f][r] = '0;
        else
          c[f][r] = $signed({1'b0, lb[row % 3][col][f]}) - $signed({1'b0, zp});
      end
    end
  endfunction

  always_ff @(posedge clk) begin
    if (take_in) lb[islot_q][ix_q][ic_q] <= s_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ic_q      <= '0;
      ix_q      <= '0;
      islot_q   <= '0;
      in_pix_q  <= '0;
      ox_q      <= '0;
      oy_q      <= '0;
      out_pix_q <= '0;
      m_valid   <= 1'b0;
      for (int f = 0; f < FIN; f++)
        for (int r = 0; r < 3; r++)
          for (int c = 0; c < 3; c++) m_win[f][r][c] <= '0;
    end else begin
      // Input side: channel, column and row-slot pointers.
      if (take_in) begin
        if (ic_q == CW'(FIN-1)) begin
          ic_q     <= '0;
          in_pix_q <= in_pix_q + 1'b1;
          if (ix_q == ($clog2(W))'(W-1)) begin
            ix_q    <= '0;
            islot_q <= (islot_q == 2'd2) ? 2'd0 : islot_q + 2'd1;
          end else begin
            ix_q <= ix_q + 1'b1;
          end
        end else begin
          ic_q <= ic_q + 1'b1;
        end
      end

      // Output side: shift the window buffer and load the new column(s).
      if (build) begin
        shifted_t c0 [FIN][3];
        shifted_t c1 [FIN][3];
        if (ox_q == '0) begin
          fetch_col(0, c0);
          fetch_col(1, c1);
          for (int f = 0; f < FIN; f++)
            for (int r = 0; r < 3; r++) begin
              m_win[f][r][0] <= '0;
              m_win[f][r][1] <= c0[f][r];
              m_win[f][r][2] <= c1[f][r];
            end
        end else begin
          fetch_col(int'(ox_q) + 1, c1);
          for (int f = 0; f < FIN; f++)
            for (int r = 0; r < 3; r++) begin
              m_win[f][r][0] <= m_win[f][r][1];
              m_win[f][r][1] <= m_win[f][r][2];
              m_win[f][r][2] <= c1[f][r];
            end
        end
        m_valid   <= 1'b1;
        out_pix_q <= out_pix_q + 1'b1;
        if (ox_q == ($clog2(W))'(W-1)) begin
          ox_q <= '0;
          oy_q <= (oy_q == ($clog2(H))'(H-1)) ? '0 : oy_q + 1'b1;
        end else begin
          ox_q <= ox_q + 1'b1;
        end
      end else if (m_ready) begin
        m_valid <= 1'b0;
      end

      // End of frame: both sides finished, start over.
      if (!build && !take_in && in_pix_q == PW'(NPIX) && out_pix_q == PW'(NPIX)) begin
        in_pix_q  <= '0;
        out_pix_q <= '0;
        islot_q   <= '0;
      end
    end
  end
endmodule
