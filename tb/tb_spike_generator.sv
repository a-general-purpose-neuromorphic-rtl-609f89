// tb_spike_generator: codes for all kernels with intensities around the three
// centre intensities (and negative ones); checks that exactly one spike
// appears, on channel 3m + level, after tau ticks; checks the overflow report
// when a channel is hit twice.
module tb_spike_generator;
  import tb_ref_pkg::*;
  import spiketrum_pkg::*;
  localparam int NK = 40, NCH = 120;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic tick = 1, emit = 0; code_t code = '0;
  logic [NCH-1:0] spikes; logic overflow, pending;
  spike_generator dut (.clk, .rst_n, .tick, .emit, .code, .spikes, .overflow, .pending);
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // reference level: nearest of the three centres in real arithmetic
  function automatic int ref_level(longint s);
    real r, c[3], best; int lv;
    c[0] = 0.0065; c[1] = 0.4115; c[2] = 25.8744;
    r = real'(mag(s)) / real'(1 << FRAC);
    lv = 0; best = (r > c[0]) ? r - c[0] : c[0] - r;
    for (int j = 1; j < 3; j++) begin
      real d; d = (r > c[j]) ? r - c[j] : c[j] - r;
      if (d < best) begin best = d; lv = j; end
    end
    return lv;
  endfunction

  task automatic one(int m, real sr, int tau);
    longint s; int ch, n, seen, at;
    s = to_q(sr);
    ch = 3 * m + ref_level(s);
    @(negedge clk); emit = 1; code = '{m: 6'(m), tau: 12'(tau), s: 34'(s)};
    @(negedge clk); emit = 0;
    seen = 0; at = -1; n = 0;
    while (n < tau + 10) begin
      @(negedge clk); n++;
      if (spikes != 0) begin
        seen += $countones(spikes);
        if (spikes[ch] && at < 0) at = n;
      end
    end
    checks++;
    // channel chosen in 1 cycle, delay armed the next; tick every cycle:
    // the spike leaves tau + 2 cycles after the emit edge
    if (seen != 1 || at != tau + 2) begin
      failures++; $display("FAIL: m=%0d s=%f tau=%0d: %0d spikes, on ch %0d at %0d", m, sr, tau, seen, ch, at);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int m = 0; m < NK; m++) begin
      real v[8];
      v[0] = 0.001; v[1] = 0.2; v[2] = 0.22; v[3] = -0.5; v[4] = 13.0; v[5] = 13.3; v[6] = 40.0; v[7] = -30.0;
      one(m, v[m % 8], (m * 37) % 60);
    end
    // nearest-centre boundaries (midpoints 0.209 and 13.1430)
    one(5, 0.2089, 3); one(5, 0.2091, 3); one(6, 13.142, 2); one(6, 13.144, 2);
    // overflow: the same channel twice
    @(negedge clk); emit = 1; code = '{m: 6'd3, tau: 12'd40, s: 34'(to_q(1.0))};
    @(negedge clk); emit = 1; code = '{m: 6'd3, tau: 12'd5, s: 34'(to_q(1.0))};
    @(negedge clk); emit = 0;
    @(negedge clk);
    checks++;
    if (!overflow) begin failures++; $display("FAIL: no overflow"); end
    checks++;
    if (!pending) begin failures++; $display("FAIL: not pending"); end
    repeat (60) @(negedge clk);
    checks++;
    if (pending) begin failures++; $display("FAIL: still pending"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
