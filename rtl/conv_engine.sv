// conv_engine: "Convolution with the Kernel Set", done sequentially in the
// time domain through one MACC core.
//
// For every kernel m = 0..N_K-1 and every time position tau = 0, STEP, ...,
// up to LEN (time shift d = tau - LEN/2, i.e. -1024..+1024 by default) it
// computes
//     c(m, tau) = sum_n x[n] * phi_m[n - d]
// over the samples n where both the segment (0..LEN-1) and the shifted
// kernel (0..LEN-1) exist, which is LEN - |d| products. Each cycle one pair
// of addresses is issued to the Signal RAM (n) and to the Kernel ROM (m, j =
// n - d); both answer one cycle later and the pair enters the MACC core.
// Every finished sum leaves on res_valid with its (m, tau); done is raised
// with the very last one.
// Timing: after the start pulse, address issue runs for T cycles, where T is
// the total number of products; done follows the start edge by T + 2 cycles
// (issue, memory read and the two MACC stages overlap). The kernel-by-kernel, shift-by-shift
// sequential search with one MACC is the paper's area-optimized scheme; the
// loop order and the STEP parameter (1 = every shift) are this design's.
module conv_engine
  import spiketrum_pkg::*;
#(
  parameter int LEN  = SEG_LEN,
  parameter int N_K  = N_KERN,
  parameter int STEP = 1,
  localparam int AW  = $clog2(LEN)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  output logic             busy,
  // Signal RAM read port
  output logic             sig_en,
  output logic [AW-1:0]    sig_addr,
  input  word_t            sig_rdata,
  // Kernel ROM read port
  output logic             kr_en,
  output logic [M_W-1:0]   kr_m,
  output logic [AW-1:0]    kr_j,
  input  word_t            kr_rdata,
  // stream of convolution results
  output logic             res_valid,
  output logic [M_W-1:0]   res_m,
  output logic [TAU_W-1:0] res_tau,
  output word_t            res_value,
  output logic             done
);

  localparam int HALF = LEN / 2;
  localparam int TAG_W = 1 + M_W + TAU_W;

  // loop state
  logic                    issuing;
  logic [M_W-1:0]          m_q;
  logic [TAU_W-1:0]        tau_q;
  logic signed [TAU_W+1:0] n_q;      // current sample index
  logic signed [TAU_W+1:0] d, n_hi;
  logic                    first_q;

  assign d    = $signed({2'b00, tau_q}) - (TAU_W+2)'(HALF);
  assign n_hi = (d < 0) ? (TAU_W+2)'(LEN - 1) + d : (TAU_W+2)'(LEN - 1);

  logic last_n, last_tau, last_m;
  assign last_n   = (n_q == n_hi);
  assign last_tau = (int'(tau_q) + STEP > 2 * HALF);
  assign last_m   = (int'(m_q) == N_K - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issuing <= 1'b0;
      m_q     <= '0;
      tau_q   <= '0;
      n_q     <= '0;
      first_q <= 1'b0;
    end else if (start && !busy) begin
      issuing <= 1'b1;
      m_q     <= '0;
      tau_q   <= '0;
      n_q     <= '0;              // tau = 0 means d = -HALF, n_lo = 0
      first_q <= 1'b1;
    end else if (issuing) begin
      first_q <= 1'b0;
      if (!last_n) begin
        n_q <= n_q + 1'b1;
      end else begin
        first_q <= 1'b1;
        if (!last_tau) begin
          tau_q <= tau_q + TAU_W'(STEP);
          // next n_lo: d grows by STEP
          n_q   <= ($signed({2'b00, tau_q}) + (TAU_W+2)'(STEP) - (TAU_W+2)'(HALF) > 0)
                   ? $signed({2'b00, tau_q}) + (TAU_W+2)'(STEP) - (TAU_W+2)'(HALF) : '0;
        end else begin
          tau_q <= '0;
          n_q   <= '0;
          if (!last_m) m_q <= m_q + 1'b1;
          else         issuing <= 1'b0;
        end
      end
    end
  end

  assign sig_en   = issuing;
  assign sig_addr = AW'(n_q);
  assign kr_en    = issuing;
  assign kr_m     = m_q;
  assign kr_j     = AW'(n_q - d);

  // align control with the one-cycle memory read
  logic             r_valid, r_first, r_last;
  logic [TAG_W-1:0] r_tag;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_valid <= 1'b0;
      r_first <= 1'b0;
      r_last  <= 1'b0;
      r_tag   <= '0;
    end else begin
      r_valid <= issuing;
      r_first <= first_q;
      r_last  <= last_n;
      r_tag   <= {last_n && last_tau && last_m, m_q, tau_q};
    end
  end

  logic [TAG_W-1:0] o_tag;
  macc_core #(.TAG_W(TAG_W)) u_macc (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (r_valid),
    .in_first (r_first),
    .in_last  (r_last),
    .in_tag   (r_tag),
    .a        (sig_rdata),
    .b        (kr_rdata),
    .out_valid(res_valid),
    .out_value(res_value),
    .out_tag  (o_tag)
  );

  assign res_m   = o_tag[TAU_W +: M_W];
  assign res_tau = o_tag[TAU_W-1:0];
  assign done    = res_valid && o_tag[TAG_W-1];

  // busy from the start pulse until the last result has left the MACC
  logic p1, p2, p3;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) {p1, p2, p3} <= '0;
    else        {p1, p2, p3} <= {issuing, p1, p2};
  end
  assign busy = issuing || p1 || p2 || p3;

endmodule
