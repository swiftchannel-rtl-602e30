// stream_fifo: synchronous valid/ready FIFO.
//
// The accelerator is a chain of small blocks joined by streams; in the paper's
// high-level-synthesis flow each stream becomes a data FIFO, and the skip path
// of every SPAB is a deeper FIFO (the "data buffer") held in block RAM. This
// module is that FIFO. Storage is a plain array (inferred as LUT-RAM or block
// RAM), addressed by read and write pointers with a separate occupancy count.
//
// Interface: s_valid/s_ready/s_data in, m_valid/m_ready/m_data out. A word is
// transferred on a rising clock edge where valid and ready are both high. The
// output reads the array word at the read pointer, valid from the cycle after
// the write (one cycle of latency). The FIFO accepts a word whenever it is not
// full; ready depends only on the count, so there is no combinational path
// from m_ready to s_ready. Depth is a parameter; the paper gives no depths, so
// 2 (the high-level-synthesis default) is used for links and a larger value
// for the SPAB skip path.
module stream_fifo #(
  parameter int W     = 8,
  parameter int DEPTH = 2
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         s_valid,
  output logic         s_ready,
  input  logic [W-1:0] s_data,
  output logic         m_valid,
  input  logic         m_ready,
  output logic [W-1:0] m_data
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wptr, rptr;
  logic [AW:0]   count;
  logic          push, pop;

  assign s_ready = (count != (AW+1)'(DEPTH));
  assign m_valid = (count != '0);
  assign m_data  = mem[rptr];
  assign push    = s_valid && s_ready;
  assign pop     = m_valid && m_ready;

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= s_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (push) wptr <= (wptr == AW'(DEPTH-1)) ? '0 : wptr + 1'b1;
      if (pop)  rptr <= (rptr == AW'(DEPTH-1)) ? '0 : rptr + 1'b1;
      case ({push, pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  // A held word must not change while it waits to be taken.
  logic         hold_q;
  logic [W-1:0] data_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold_q <= 1'b0;
      data_q <= '0;
    end else begin
      hold_q <= m_valid && !m_ready;
      data_q <= m_data;
      if (hold_q) assert (m_valid && m_data == data_q)
        else $error("stream_fifo: output word changed while stalled");
    end
  end
endmodule
