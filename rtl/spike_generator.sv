// spike_generator: Intensity-to-Place coding of the codes into spikes.
//
// Each kernel owns N_LEV = 3 output channels ("section" m holds channels
// 3m, 3m+1, 3m+2), one per intensity level, with centre intensities
// C0 = 0.0065, C1 = 0.4115, C2 = 25.8744 (Q9.24 constants from the package,
// overridable). When a code (m, tau, s) arrives with `emit`, the level whose
// centre is closest to |s| is chosen (smallest |(|s|) - Cj|, lowest j on a
// tie), and the delay element of channel N_LEV*m + j is armed with tau ticks.
// When it expires, spikes[N_LEV*m + j] is high for one cycle. With 40
// kernels there are 120 channels. If the chosen channel still holds a
// pending spike, the new one is dropped and `overflow` pulses.
// Timing: the delay element is armed the cycle after emit; the spike leaves
// after tau ticks (see itp_delay). The channel layout, the three centres and
// the closest-centre rule are the paper's; linear distance as "closest" and
// the overflow rule are this design's.
module spike_generator
  import spiketrum_pkg::*;
#(
  parameter int    N_K   = N_KERN,
  parameter int    N_LEV = N_LEVEL,
  parameter word_t C0    = C_LEVEL0,
  parameter word_t C1    = C_LEVEL1,
  parameter word_t C2    = C_LEVEL2,
  localparam int   N_CH  = N_K * N_LEV
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            tick,
  input  logic            emit,
  input  code_t           code,
  output logic [N_CH-1:0] spikes,
  output logic            overflow,
  output logic            pending
);

  localparam int CH_W = $clog2(N_CH);

  // closest centre intensity
  logic [DATA_W-1:0] mag;
  logic [DATA_W:0]   dst [N_LEV];
  logic [1:0]        lev;
  word_t             centre [3];

  assign centre[0] = C0;
  assign centre[1] = C1;
  assign centre[2] = C2;
  assign mag = word_abs(code.s);

  always_comb begin
    for (int j = 0; j < N_LEV; j++) begin
      logic [DATA_W:0] c;
      c = (DATA_W+1)'(unsigned'(centre[j]));
      dst[j] = ({1'b0, mag} >= c) ? ({1'b0, mag} - c) : (c - {1'b0, mag});
    end
    lev = 2'd0;
    for (int j = 1; j < N_LEV; j++)
      if (dst[j] < dst[lev]) lev = 2'(j);
  end

  // channel select, registered
  logic             ld_q;
  logic [CH_W-1:0]  ch_q;
  logic [TAU_W-1:0] tau_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ld_q  <= 1'b0;
      ch_q  <= '0;
      tau_q <= '0;
    end else begin
      ld_q <= emit;
      if (emit) begin
        ch_q  <= CH_W'(code.m) * CH_W'(N_LEV) + CH_W'(lev);
        tau_q <= code.tau;
      end
    end
  end

  logic [N_CH-1:0] busy, collide;
  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    itp_delay u_delay (
      .clk    (clk),
      .rst_n  (rst_n),
      .tick   (tick),
      .load   (ld_q && (ch_q == CH_W'(c))),
      .delay  (tau_q),
      .busy   (busy[c]),
      .spike  (spikes[c]),
      .collide(collide[c])
    );
  end

  assign overflow = |collide;
  assign pending  = |busy;

  assert property (@(posedge clk) disable iff (!rst_n) emit |-> (int'(code.m) < N_K))
    else $error("spike_generator: kernel index out of range");
  initial assert (N_LEV >= 1 && N_LEV <= 3)
    else $error("spike_generator: 1 to 3 levels supported");

endmodule
