// tb_spiketrum_top: end-to-end run of the encoder at reduced size (64-sample
// segments, 4 Gammatone kernels, 12 channels).
//
// A dictionary of Gammatone kernels is computed here and loaded. Test
// signals are sums of kernels at large (level 2), medium (level 1) and small
// (level 0) amplitudes at positive, zero and negative time shifts. Six
// segments are streamed with different settings so that every mechanism
// occurs: the k limit, the threshold stop, k = 0, back-pressure on the input
// while a segment is encoded, codes at positive and negative shifts, all
// three output levels, and (with a slow tick) a channel hit while its spike
// is pending. Each code is compared with a matching-pursuit reference
// computed here with the same fixed-point rules, each spike's channel and
// delay with the code it came from, and the cycles from one code to the next
// with the search length (one MAC per cycle) plus the residual step.
module tb_spiketrum_top;
  import tb_ref_pkg::*;
  import spiketrum_pkg::*;
  localparam int LEN = 64, HALF = 32, NK = 4, NCH = NK * 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin #200000000; failures++; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  logic in_valid = 0, in_ready; word_t in_data = 0;
  logic kl_en = 0; logic [5:0] kl_m = 0; logic [5:0] kl_j = 0; word_t kl_data = 0;
  logic [CNT_W-1:0] cfg_k = 0; logic [DATA_W-1:0] cfg_threshold = 0;
  logic itp_tick;
  logic [NCH-1:0] spikes;
  logic code_valid, seg_done, stop_thr, stop_cnt, itp_overflow, itp_pending, busy;
  code_t code_out; logic [CNT_W-1:0] n_codes;

  spiketrum_top #(.LEN(LEN), .N_K(NK)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_data, .kl_en, .kl_m,
    .kl_j, .kl_data, .cfg_k, .cfg_threshold, .itp_tick, .spikes, .code_valid, .code_out, .seg_done,
    .stop_thr, .stop_cnt, .itp_overflow, .itp_pending, .n_codes, .busy);

  task automatic chk(logic cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---- tick generator ----
  int tick_period = 3;
  always_comb itp_tick = (cyc % longint'(tick_period)) == 0;

  // ---- dictionary and reference ----
  longint phi [];
  ref_code_t exp_codes [$];
  int exp_thr = 0, exp_cnt = 0;

  function automatic void make_signal(int variant, ref longint x[]);
    real a[3]; int m[3], d[3];
    x = new[LEN];
    a = '{30.0, 0.5, 0.01};
    m = '{1, 3, 0};
    d = '{10, -20, 0};
    if (variant == 1) begin a = '{-20.0, 0.3, -0.02}; m = '{2, 0, 3}; d = '{-7, 25, 3}; end
    for (int n = 0; n < LEN; n++) begin
      real v; v = 0.0;
      for (int i = 0; i < 3; i++)
        if (n - d[i] >= 0 && n - d[i] < LEN)
          v += a[i] * real'(phi[m[i] * LEN + n - d[i]]) / real'(1 << FRAC);
      x[n] = to_q(v);
    end
  endfunction

  // ---- mechanism counters ----
  int n_stall = 0, n_overflow = 0, n_pos = 0, n_neg = 0, n_lvl [3] = '{0, 0, 0};
  int n_stop_thr = 0, n_stop_cnt = 0, n_codes_seen = 0, n_spikes = 0, n_k0 = 0;
  always @(posedge clk) if (rst_n) begin
    if (in_valid && !in_ready) n_stall++;
    if (itp_overflow) n_overflow++;
    if (stop_thr) n_stop_thr++;
    if (stop_cnt) n_stop_cnt++;
  end

  // ---- code checker and spike bookkeeping ----
  int     pend_tau [NCH];
  int     pend_ticks [NCH];
  bit     pend [NCH];
  int     exp_overflows = 0;
  longint last_code_cyc = -1;
  int     code_gap = -1;
  bit     gap_ok = 1;

  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NCH; c++) if (pend[c] && itp_tick) pend_ticks[c]++;
    if (code_valid) begin
      ref_code_t e; int ch;
      n_codes_seen++;
      if (exp_codes.size() == 0) begin
        checks++; failures++; $display("FAIL: unexpected code m=%0d tau=%0d", code_out.m, code_out.tau);
      end else begin
        e = exp_codes.pop_front();
        checks++;
        if (int'(code_out.m) != e.m || int'(code_out.tau) != e.tau || longint'(code_out.s) != e.s) begin
          failures++;
          $display("FAIL: code (%0d,%0d,%0d), expected (%0d,%0d,%0d)", code_out.m, code_out.tau,
                   code_out.s, e.m, e.tau, e.s);
        end
      end
      if (int'(code_out.tau) > HALF) n_pos++;
      if (int'(code_out.tau) < HALF) n_neg++;
      n_lvl[ref_level(longint'(code_out.s))]++;
      ch = 3 * int'(code_out.m) + ref_level(longint'(code_out.s));
      if (pend[ch]) exp_overflows++;
      else begin pend[ch] = 1; pend_tau[ch] = int'(code_out.tau); pend_ticks[ch] = 0; end
      // codes of one segment follow each other by a constant gap
      if (last_code_cyc >= 0 && n_codes > 1) begin
        if (code_gap < 0) code_gap = int'(cyc - last_code_cyc);
        else if (int'(cyc - last_code_cyc) != code_gap) gap_ok = 0;
      end
      last_code_cyc = cyc;
    end
    for (int c = 0; c < NCH; c++) if (spikes[c]) begin
      n_spikes++;
      checks++;
      if (!pend[c]) begin failures++; $display("FAIL: spike on channel %0d with no code", c); end
      else if (pend_ticks[c] < pend_tau[c] || pend_ticks[c] > pend_tau[c] + 2) begin
        failures++; $display("FAIL: channel %0d spike after %0d ticks, tau %0d", c, pend_ticks[c], pend_tau[c]);
      end
      pend[c] = 0;
    end
  end

  // ---- stimulus ----
  task automatic send_segment(ref longint x[]);
    for (int n = 0; n < LEN; n++) begin
      @(negedge clk); in_valid = 1; in_data = word_t'(x[n]);
      @(posedge clk); while (!in_ready) @(posedge clk);
    end
    @(negedge clk); in_valid = 0;
  endtask

  task automatic expect_segment(int variant, int k, real thr);
    longint x []; ref_code_t cs [$]; bit by_thr;
    make_signal(variant, x);
    mp_encode(x, phi, NK, LEN, 1, k, to_q(thr), cs, by_thr);
    foreach (cs[i]) exp_codes.push_back(cs[i]);
    if (by_thr) exp_thr++; else exp_cnt++;
  endtask

  task automatic wait_idle();
    int g; g = 0;
    @(negedge clk);
    while ((busy || !in_ready) && g < 10000000) begin @(negedge clk); g++; end
  endtask

  initial begin
    longint x [];
    // Gammatone dictionary, Q9.24
    phi = new[NK * LEN];
    for (int m = 0; m < NK; m++) begin
      real g []; gammatone(m, NK, LEN, g);
      for (int j = 0; j < LEN; j++) phi[m * LEN + j] = to_q(g[j]);
    end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int m = 0; m < NK; m++) for (int j = 0; j < LEN; j++) begin
      @(negedge clk); kl_en = 1; kl_m = 6'(m); kl_j = 6'(j); kl_data = word_t'(phi[m * LEN + j]);
    end
    @(negedge clk); kl_en = 0;

    // 1+2: k = 3, tiny threshold, back to back (the second waits on in_ready)
    cfg_k = 3; cfg_threshold = DATA_W'(to_q(0.001));
    expect_segment(0, 3, 0.001); expect_segment(1, 3, 0.001);
    make_signal(0, x); send_segment(x);
    make_signal(1, x); send_segment(x);
    wait_idle();
    // 3: k = 5, threshold 0.1: ends once the large component is removed
    cfg_k = 5; cfg_threshold = DATA_W'(to_q(0.1));
    expect_segment(1, 5, 0.1);
    make_signal(1, x); send_segment(x); wait_idle();
    // 4: k = 0
    cfg_k = 0;
    expect_segment(0, 0, 0.1); n_k0 = 1;
    make_signal(0, x); send_segment(x); wait_idle();
    // 5+6: slow tick, the same segment twice: the repeated codes hit
    // channels whose spikes are still pending
    tick_period = 4000;
    cfg_k = 3; cfg_threshold = DATA_W'(to_q(0.001));
    expect_segment(0, 3, 0.001); expect_segment(0, 3, 0.001);
    make_signal(0, x); send_segment(x); send_segment(x); wait_idle();
    tick_period = 1;
    begin int g; g = 0; while (itp_pending && g < 100000) begin @(negedge clk); g++; end end
    repeat (10) @(negedge clk);

    chk(exp_codes.size() == 0, $sformatf("%0d expected codes never came", exp_codes.size()));
    chk(n_stop_thr == exp_thr, $sformatf("threshold stops %0d, expected %0d", n_stop_thr, exp_thr));
    chk(n_stop_cnt == exp_cnt, $sformatf("count stops %0d, expected %0d", n_stop_cnt, exp_cnt));
    chk(n_overflow == exp_overflows, $sformatf("overflows %0d, expected %0d", n_overflow, exp_overflows));
    chk(n_spikes == n_codes_seen - exp_overflows, $sformatf("%0d spikes for %0d codes", n_spikes, n_codes_seen));
    chk(gap_ok && code_gap > 0, "constant cycles per code");
    // a search over 4 kernels x 65 shifts is 4*(65*64 - 2*(32*33/2)) = 12416 MACs
    chk(code_gap >= 12416 && code_gap < 12416 + 12 * LEN + 40, $sformatf("cycles per code %0d", code_gap));
    $display("mechanisms: stalls=%0d threshold_stops=%0d count_stops=%0d k0=%0d overflows=%0d pos_shift=%0d neg_shift=%0d levels=%0d/%0d/%0d codes=%0d spikes=%0d cycles_per_code=%0d",
             n_stall, n_stop_thr, n_stop_cnt, n_k0, n_overflow, n_pos, n_neg, n_lvl[0], n_lvl[1], n_lvl[2],
             n_codes_seen, n_spikes, code_gap);
    chk(n_stall > 0, "back-pressure never happened");
    chk(n_stop_thr > 0, "threshold stop never happened");
    chk(n_stop_cnt > 0, "k limit never happened");
    chk(n_overflow > 0, "ITP channel overflow never happened");
    chk(n_pos > 0 && n_neg > 0, "positive and negative shifts");
    chk(n_lvl[0] > 0 && n_lvl[1] > 0 && n_lvl[2] > 0, "all three output levels");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
