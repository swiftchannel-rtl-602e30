// ls_estimator: least-squares channel estimate at the pilot positions.
//
// For every received pilot sample y on subcarrier k, receive antenna r and UE
// antenna u, the LS estimate is H = y / s, with s the known sounding reference
// signal (SRS) of that subcarrier and UE antenna. As in the paper, the division
// is avoided by caching the pilots already divided by their squared magnitude,
// p = s / |s|^2, in an on-chip table, so that H = y * conj(p):
//   Re H = yr*pr + yi*pi,   Im H = yi*pr - yr*pi.
// One complex multiply (four multipliers) per sample, all in FIX32.
//
// Sample order (this design's choice, the paper does not fix it): subcarrier k
// is the slow index (H_LS rows, N_K of them), the column w = r*N_UE + u the
// fast one (N_R*N_UE columns). The pilot used is p[k][u], u = w mod N_UE.
//
// Interface: s_* carries {yi, yr} (FIX32 each) with valid/ready, m_* carries
// {Im H, Re H}. One register stage: latency one cycle, one sample per cycle.
// Pilot table write port (cfg unit 0): offset = (k*N_UE + u)*2 + {0: Re, 1: Im}.
module ls_estimator
  import sc_pkg::*;
#(
  parameter int N_K  = 108,  // pilot subcarriers (H)
  parameter int N_R  = 16,   // active receive antennas
  parameter int N_UE = 2     // UE antennas
) (
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
  output logic [63:0] m_data
);
  localparam int NP = N_K * N_UE;
  localparam int NW = N_R * N_UE;

  fix32_t pilot_re [NP];
  fix32_t pilot_im [NP];

  always_ff @(posedge clk) begin
    if (cfg_we && (32'(cfg_addr) < 32'(2*NP))) begin
      if (cfg_addr[0]) pilot_im[cfg_addr[$clog2(NP):1]] <= cfg_wdata;
      else             pilot_re[cfg_addr[$clog2(NP):1]] <= cfg_wdata;
    end
  end

  // Position counters of the incoming sample.
  logic [$clog2(N_K)-1:0] k_q;
  logic [$clog2(NW)-1:0]  w_q;
  logic [$clog2(NP)-1:0]  pidx;
  logic                   take;

  assign s_ready = !m_valid || m_ready;
  assign take    = s_valid && s_ready;
  assign pidx    = ($clog2(NP))'(32'(k_q) * N_UE + 32'(w_q) % N_UE);

  fix32_t yr, yi, pr, pi_, hr, hi;
  assign yr  = s_data[31:0];
  assign yi  = s_data[63:32];
  assign pr  = pilot_re[pidx];
  assign pi_ = pilot_im[pidx];
  assign hr  = fix_add(fix_mul(yr, pr), fix_mul(yi, pi_));
  assign hi  = fix_sub(fix_mul(yi, pr), fix_mul(yr, pi_));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k_q     <= '0;
      w_q     <= '0;
      m_valid <= 1'b0;
      m_data  <= '0;
    end else begin
      if (take) begin
        m_valid <= 1'b1;
        m_data  <= {hi, hr};
        if (w_q == ($clog2(NW))'(NW-1)) begin
          w_q <= '0;
          k_q <= (k_q == ($clog2(N_K))'(N_K-1)) ? '0 : k_q + 1'b1;
        end else begin
          w_q <= w_q + 1'b1;
        end
      end else if (m_ready) begin
        m_valid <= 1'b0;
      end
    end
  end
endmodule
