// pixel_shuffle: pipelined depth-to-space rearrangement (up-scaling by R).
//
// Input: H x W pixels of COUT*R*R channels, depth-first order. Channel
// c = co*R*R + i*R + j of input pixel (y, x) becomes output element
// (Y = y*R + i, X = x*R + j, channel co). Output: (R*H) x (R*W) x COUT in
// depth-first order, one value per cycle. No arithmetic is done; the work is
// ordering the data without a monolithic line buffer.
//
// Structure (the paper's distributed FIFOs and registers):
//   * a capture register collects the COUT*R*R values of one input pixel;
//   * a distribution register (dreg) then hands them out in R*COUT steps, one value
//     to each of R sub-row FIFOs per step, in output order (j, co); sub-row
//     FIFO i collects output row y*R + i for the whole input row;
//   * there are two banks of R sub-row FIFOs, W*R*COUT deep each; input row y
//     uses bank y mod 2;
//   * the reader empties the bank of the current row, sub-row 0 to R-1.
// Sub-row 0 of a row is written to the output while that row is still being
// read (the first output row of each region leaves as it arrives, as in the
// paper's pipeline diagram); the other sub-rows wait in their FIFOs and are
// written afterwards, while the next input row already fills the other bank.
// The result is one output value per cycle in steady state.
//
// Interface: valid/ready U8 streams. The block works row by row and needs
// no frame height: frames of any number of rows follow one another.
module pixel_shuffle
  import sc_pkg::*;
#(
  parameter int W    = 32,
  parameter int R    = 4,
  parameter int COUT = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  logic s_valid,
  output logic s_ready,
  input  u8_t  s_data,
  output logic m_valid,
  input  logic m_ready,
  output u8_t  m_data
);
  localparam int CIN  = COUT * R * R;
  localparam int STEP = R * COUT;          // distribution steps per pixel
  localparam int SUBN = W * R * COUT;      // values in one output row
  localparam int CINW = $clog2(CIN);
  localparam int STW  = (STEP > 1) ? $clog2(STEP) : 1;
  localparam int XW   = (W > 1) ? $clog2(W) : 1;
  localparam int RW   = (R > 1) ? $clog2(R) : 1;
  localparam int SNW  = $clog2(SUBN);

  // Capture register.
  u8_t             cap [CIN];
  logic [CINW-1:0] cc_q;
  logic            cap_full;
  // Distribution register.
  u8_t             dreg [CIN];
  logic            dist_busy;
  logic [STW-1:0]  step_q;
  logic [XW-1:0]   wx_q;
  logic            wb_q;
  // Sub-row FIFOs.
  logic            f_in_valid  [2][R];
  logic            f_in_ready  [2][R];
  u8_t             f_in_data   [R];
  logic            f_out_valid [2][R];
  logic            f_out_ready [2][R];
  u8_t             f_out_data  [2][R];
  // Reader.
  logic            rb_q;
  logic [RW-1:0]   ri_q;
  logic [SNW-1:0]  rn_q;

  logic push_ok, push, load_dist;
  int   jj, co;

  assign jj = int'(step_q) / COUT;
  assign co = int'(step_q) % COUT;

  always_comb begin
    push_ok = 1'b1;
    for (int i = 0; i < R; i++) begin
      if (!f_in_ready[wb_q][i]) push_ok = 1'b0;
      f_in_data[i] = dreg[co*R*R + i*R + jj];
    end
  end
  assign push      = dist_busy && push_ok;
  assign load_dist = cap_full && (!dist_busy || (push && step_q == STW'(STEP-1)));
  assign s_ready   = !cap_full || load_dist;

  always_comb begin
    for (int b = 0; b < 2; b++)
      for (int i = 0; i < R; i++)
        f_in_valid[b][i] = push && (wb_q == b[0]);
  end

  for (genvar b = 0; b < 2; b++) begin : g_bank
    for (genvar i = 0; i < R; i++) begin : g_sub
      stream_fifo #(.W(8), .DEPTH(SUBN)) u_sub (
        .clk, .rst_n,
        .s_valid(f_in_valid[b][i]), .s_ready(f_in_ready[b][i]), .s_data(f_in_data[i]),
        .m_valid(f_out_valid[b][i]), .m_ready(f_out_ready[b][i]), .m_data(f_out_data[b][i])
      );
    end
  end

  assign m_valid = f_out_valid[rb_q][ri_q];
  assign m_data  = f_out_data[rb_q][ri_q];
  always_comb begin
    for (int b = 0; b < 2; b++)
      for (int i = 0; i < R; i++)
        f_out_ready[b][i] = m_ready && (rb_q == b[0]) && (ri_q == RW'(i));
  end

  always_ff @(posedge clk) begin
    if (s_valid && s_ready) cap[cc_q] <= s_data;
    if (load_dist) begin
      for (int c = 0; c < CIN; c++) dreg[c] <= cap[c];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cc_q      <= '0;
      cap_full  <= 1'b0;
      dist_busy <= 1'b0;
      step_q    <= '0;
      wx_q      <= '0;
      wb_q      <= 1'b0;
      rb_q      <= 1'b0;
      ri_q      <= '0;
      rn_q      <= '0;
    end else begin
      // Capture.
      if (load_dist) cap_full <= 1'b0;
      if (s_valid && s_ready) begin
        if (cc_q == CINW'(CIN-1)) begin
          cc_q     <= '0;
          cap_full <= 1'b1;
        end else begin
          cc_q <= cc_q + 1'b1;
        end
      end
      // Distribution into the sub-row FIFOs of bank wb.
      if (push) begin
        if (step_q == STW'(STEP-1)) begin
          step_q    <= '0;
          dist_busy <= 1'b0;
          if (wx_q == XW'(W-1)) begin
            wx_q <= '0;
            wb_q <= !wb_q;
          end else begin
            wx_q <= wx_q + 1'b1;
          end
        end else begin
          step_q <= step_q + 1'b1;
        end
      end
      if (load_dist) begin
        dist_busy <= 1'b1;
        step_q    <= '0;
      end
      // Reader: bank rb, sub-row ri, element rn.
      if (m_valid && m_ready) begin
        if (rn_q == SNW'(SUBN-1)) begin
          rn_q <= '0;
          if (ri_q == RW'(R-1)) begin
            ri_q <= '0;
            rb_q <= !rb_q;
          end else begin
            ri_q <= ri_q + 1'b1;
          end
        end else begin
          rn_q <= rn_q + 1'b1;
        end
      end
    end
  end
endmodule
