// tb_stream_fifo: self-checking test of the valid/ready FIFO.
//
// Pushes 2000 random words through FIFOs of depth 2 and 5 with random gaps
// on both sides and checks order and content, that ready falls exactly when
// DEPTH words are held, and that a full FIFO still takes a word in the
// cycle after one leaves.
module tb_stream_fifo;
  localparam int N = 2000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic       s_valid [2];
  logic       s_ready [2];
  logic [7:0] s_data  [2];
  logic       m_valid [2];
  logic       m_ready [2];
  logic [7:0] m_data  [2];

  stream_fifo #(.W(8), .DEPTH(2)) dut2 (.clk, .rst_n, .s_valid(s_valid[0]), .s_ready(s_ready[0]),
    .s_data(s_data[0]), .m_valid(m_valid[0]), .m_ready(m_ready[0]), .m_data(m_data[0]));
  stream_fifo #(.W(8), .DEPTH(5)) dut5 (.clk, .rst_n, .s_valid(s_valid[1]), .s_ready(s_ready[1]),
    .s_data(s_data[1]), .m_valid(m_valid[1]), .m_ready(m_ready[1]), .m_data(m_data[1]));

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int sent [2], rcvd [2], held [2];
  logic [7:0] model [2][$];
  int depth [2] = '{2, 5};

  for (genvar d = 0; d < 2; d++) begin : g
    always @(negedge clk) begin
      if (rst_n) begin
        // occupancy check before this cycle's transfers
        checks++;
        if (s_ready[d] != (held[d] < depth[d])) begin
          failures++;
          $display("depth %0d: ready=%0d with %0d held", depth[d], s_ready[d], held[d]);
        end
        m_ready[d] = ($urandom_range(2) != 0);
        s_valid[d] = (sent[d] < N) && ($urandom_range(2) != 0);
        s_data[d]  = 8'($urandom);
        #1;
        if (m_valid[d] && m_ready[d]) begin
          logic [7:0] e;
          e = model[d].pop_front();
          checks++;
          if (m_data[d] != e) begin
            failures++;
            $display("depth %0d word %0d: got %0h exp %0h", depth[d], rcvd[d], m_data[d], e);
          end
          rcvd[d]++; held[d]--;
        end
        if (s_valid[d] && s_ready[d]) begin
          model[d].push_back(s_data[d]);
          sent[d]++; held[d]++;
        end
      end
    end
  end

  initial begin
    for (int d = 0; d < 2; d++) begin
      s_valid[d] = 0; m_ready[d] = 0; s_data[d] = 0; sent[d] = 0; rcvd[d] = 0; held[d] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (rcvd[0] == N && rcvd[1] == N);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
