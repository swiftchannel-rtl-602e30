// filter3d: tiled 3x3 convolution of one window, with re-quantisation.
//
// This is Algorithm 1 of the design. For each window (3x3xFIN shifted input
// values) the FOUT sums are computed tile by tile: the output channels are cut
// into FOUT/TM tiles and the input channels into FIN/TN tiles, and one
// (output tile, input tile) pair is processed per clock cycle (initiation
// interval 1). In that cycle the PE array forms TM partial sums, each over
// TN input channels x 3 x 3 kernel positions (TM*TN*9 multipliers, fully
// unrolled), and adds them to the INT32 sums. The first input tile of an
// output tile starts from the bias, so a window takes
// (FOUT/TM)*(FIN/TN) cycles. The loop order is the paper's: output tile outer,
// input tile inner, kernel and lanes unrolled.
//
// The finished sums move to an output register bank, and a serializer writes
// them one channel per cycle (fo = 0..FOUT-1) after "scale and shift":
// z = requant(sum, mult[fo], shift[fo], zp_out) (per-channel scale, see
// sc_pkg). The next window is computed while the previous one is written out,
// so a pixel costs max((FOUT/TM)*(FIN/TN), FOUT) cycles.
//
// The paper writes the PE count as (FOUT/TM)*(FIN/TN) and draws the PEs as an
// array, while Algorithm 1 pipelines the tile loop at II=1; this design follows
// Algorithm 1: one tile of PEs is built and used (FOUT/TM)*(FIN/TN) times per
// window.
//
// Interface: s_valid/s_ready/s_win from window3d (the window is held by the
// sender until the last tile, when s_ready is raised); m_valid/m_ready/m_data
// a U8 stream. Weights are the zero-point-adjusted signed 8-bit values.
module filter3d
  import sc_pkg::*;
#(
  parameter int FIN  = 12,
  parameter int FOUT = 8,
  parameter int TM   = 4,
  parameter int TN   = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  i8_t               wgt   [FOUT][FIN][3][3],
  input  i32_t              bias  [FOUT],
  input  logic signed [31:0] mult [FOUT],
  input  logic [5:0]        shift [FOUT],
  input  u8_t               zp_out,
  input  logic              s_valid,
  output logic              s_ready,
  input  shifted_t          s_win [FIN][3][3],
  output logic              m_valid,
  input  logic              m_ready,
  output u8_t               m_data
);
  localparam int NTO = FOUT / TM;
  localparam int NTI = FIN / TN;
  localparam int TOW = (NTO > 1) ? $clog2(NTO) : 1;
  localparam int TIW = (NTI > 1) ? $clog2(NTI) : 1;
  localparam int FOW = (FOUT > 1) ? $clog2(FOUT) : 1;

  i32_t sum     [FOUT];
  i32_t out_sum [FOUT];
  i32_t partial [TM];

  logic [TOW-1:0] to_q;
  logic [TIW-1:0] ti_q;
  logic           done_q;     // sum[] holds a finished window
  logic           ser_q;      // serializer busy
  logic [FOW-1:0] fo_q;
  logic           last_tile, compute, ser_last, transfer;

  assign last_tile = (to_q == TOW'(NTO-1)) && (ti_q == TIW'(NTI-1));
  assign ser_last  = ser_q && m_ready && (fo_q == FOW'(FOUT-1));
  assign transfer  = done_q && (!ser_q || ser_last);
  assign compute   = s_valid && (!done_q || transfer);
  assign s_ready   = compute && last_tile;

  // PE array: TM partial sums over TN channels x 3 x 3.
  always_comb begin
    for (int too = 0; too < TM; too++) begin
      partial[too] = '0;
      for (int rr = 0; rr < 3; rr++)
        for (int cc = 0; cc < 3; cc++)
          for (int tii = 0; tii < TN; tii++)
            partial[too] += 32'(s_win[int'(ti_q)*TN + tii][rr][cc]) *
                            32'(wgt[int'(to_q)*TM + too][int'(ti_q)*TN + tii][rr][cc]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      to_q   <= '0;
      ti_q   <= '0;
      done_q <= 1'b0;
      ser_q  <= 1'b0;
      fo_q   <= '0;
      for (int i = 0; i < FOUT; i++) begin
        sum[i]     <= '0;
        out_sum[i] <= '0;
      end
    end else begin
      if (transfer) begin
        for (int i = 0; i < FOUT; i++) out_sum[i] <= sum[i];
        done_q <= 1'b0;
        ser_q  <= 1'b1;
        fo_q   <= '0;
      end else if (ser_q && m_ready) begin
        if (fo_q == FOW'(FOUT-1)) ser_q <= 1'b0;
        fo_q <= fo_q + 1'b1;
      end

      if (compute) begin
        for (int too = 0; too < TM; too++) begin
          if (ti_q == '0) sum[int'(to_q)*TM + too] <= bias[int'(to_q)*TM + too] + partial[too];
          else            sum[int'(to_q)*TM + too] <= sum[int'(to_q)*TM + too] + partial[too];
        end
        if (ti_q == TIW'(NTI-1)) begin
          ti_q <= '0;
          to_q <= (to_q == TOW'(NTO-1)) ? '0 : to_q + 1'b1;
        end else begin
          ti_q <= ti_q + 1'b1;
        end
        if (last_tile) done_q <= 1'b1;
      end
    end
  end

  assign m_valid = ser_q;
  assign m_data  = requant(out_sum[fo_q], mult[fo_q], shift[fo_q], zp_out);
endmodule
