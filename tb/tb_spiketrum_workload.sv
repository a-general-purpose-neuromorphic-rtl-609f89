// tb_spiketrum_workload: the encoder on signal-like input with the full
// 40-kernel dictionary and all 120 output channels, at 16 codes per segment
// (the area-optimized rate the design is meant for), on 256-sample segments
// so that the run stays short.
//
// Two segments are generated here and streamed back to back:
//   - an ECG-like beat: narrow P, Q, R, S and T bumps (Gaussian shapes)
//     compressed into one segment;
//   - a cymbal-like burst: three decaying high-frequency tones plus
//     pseudo-random noise with a decaying envelope.
// Every code is compared bit for bit with the matching-pursuit reference,
// every spike with its code's channel (3m + nearest level) and its delay
// (tau + 3 cycles with a tick every cycle), and the cycles from one code to
// the next with the search length (40 x (257 x 256 - 128 x 129) MACs) plus
// the residual step. The signal is also rebuilt from the codes the encoder
// gives: the energy of the error must fall with every code, as it must for
// matching pursuit with unit-energy kernels.
module tb_spiketrum_workload;
  import tb_ref_pkg::*;
  import spiketrum_pkg::*;
  localparam int LEN = 256, HALF = 128, NK = 40, NCH = 120, K = 16, NSEG = 2;
  localparam longint SEARCH = 64'd40 * (64'd257 * 64'd256 - 64'd128 * 64'd129);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin #1500000000; failures++; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  logic in_valid = 0, in_ready; word_t in_data = 0;
  logic kl_en = 0; logic [5:0] kl_m = 0; logic [7:0] kl_j = 0; word_t kl_data = 0;
  logic [CNT_W-1:0] cfg_k = 0; logic [DATA_W-1:0] cfg_threshold = 0;
  logic itp_tick = 1;
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

  longint phi [];
  ref_code_t exp_codes [$];
  code_t got_codes [$];
  longint code_cyc [$];
  int n_spikes = 0, n_seg_done = 0, pend_ch = -1, pend_tau = 0; longint pend_cyc = 0;
  int n_lvl [3] = '{0, 0, 0};
  bit ch_used [NCH];

  always @(posedge clk) if (rst_n) begin
    if (seg_done) n_seg_done++;
    if (code_valid) begin
      ref_code_t e;
      code_cyc.push_back(cyc);
      got_codes.push_back(code_out);
      checks++;
      if (exp_codes.size() == 0) begin failures++; $display("FAIL: unexpected code"); end
      else begin
        e = exp_codes.pop_front();
        if (int'(code_out.m) != e.m || int'(code_out.tau) != e.tau || longint'(code_out.s) != e.s) begin
          failures++;
          $display("FAIL: code (%0d,%0d,%0d), expected (%0d,%0d,%0d)", code_out.m, code_out.tau,
                   code_out.s, e.m, e.tau, e.s);
        end
      end
      pend_ch = 3 * int'(code_out.m) + ref_level(longint'(code_out.s));
      pend_tau = int'(code_out.tau); pend_cyc = cyc;
    end
    if (spikes != 0) begin
      n_spikes++;
      checks++;
      if (pend_ch < 0 || !spikes[pend_ch] || $countones(spikes) != 1 || cyc - pend_cyc != longint'(pend_tau + 3)) begin
        failures++; $display("FAIL: spike %h at %0d, expected channel %0d at %0d", spikes, cyc, pend_ch, pend_cyc + pend_tau + 3);
      end else begin
        n_lvl[pend_ch % 3]++;
        ch_used[pend_ch] = 1;
      end
      pend_ch = -1;
    end
  end

  // ECG-like beat: sum of Gaussian bumps (centre, width, amplitude).
  function automatic void make_ecg(ref longint x[]);
    real c[5], w[5], a[5];
    c = '{50.0, 110.0, 118.0, 126.0, 190.0};
    w = '{8.0, 2.5, 3.0, 2.5, 14.0};
    a = '{0.15, -0.12, 1.0, -0.25, 0.3};
    x = new[LEN];
    for (int n = 0; n < LEN; n++) begin
      real v; v = 0.0;
      for (int i = 0; i < 5; i++) v += a[i] * $exp(-((real'(n) - c[i]) ** 2) / (2.0 * w[i] * w[i]));
      x[n] = to_q(v);
    end
  endfunction

  // Cymbal-like burst at 16 kHz: decaying tones at 3.1, 4.7 and 5.9 kHz plus
  // noise from a 16-bit LFSR, onset at sample 40.
  function automatic void make_cymbal(ref longint x[]);
    real f[3], a[3];
    logic [15:0] lfsr;
    f = '{3100.0, 4700.0, 5900.0};
    a = '{0.5, 0.35, 0.25};
    lfsr = 16'hACE1;
    x = new[LEN];
    for (int n = 0; n < LEN; n++) begin
      real v, t, env;
      v = 0.0;
      if (n >= 40) begin
        t = real'(n - 40) / 16000.0;
        env = $exp(-real'(n - 40) / 60.0);
        for (int i = 0; i < 3; i++) v += a[i] * env * $sin(2.0 * 3.141592653589793 * f[i] * t);
        v += 0.2 * env * (real'(lfsr) / 32768.0 - 1.0);
      end
      lfsr = {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
      x[n] = to_q(v);
    end
  endfunction

  function automatic real energy(ref real e[]);
    real s; s = 0.0;
    foreach (e[i]) s += e[i] * e[i];
    return s;
  endfunction

  // Error energy after each of the given codes, rebuilding from the input.
  task automatic check_energy(input longint x[], input int first, input int n, input string name);
    real err [], e_prev, e_now;
    err = new[LEN];
    for (int i = 0; i < LEN; i++) err[i] = real'(x[i]) / real'(1 << FRAC);
    e_prev = energy(err);
    $display("%s: input energy %f", name, e_prev);
    for (int c = first; c < first + n; c++) begin
      int d, m; real s; bit ok; code_t cc;
      cc = got_codes[c];
      d = int'(cc.tau) - HALF;
      m = int'(cc.m);
      s = real'(cc.s) / real'(1 << FRAC);
      for (int i = 0; i < LEN; i++)
        if (i - d >= 0 && i - d < LEN) err[i] -= s * real'(phi[m * LEN + i - d]) / real'(1 << FRAC);
      e_now = energy(err);
      ok = e_now < e_prev + 1.0e-6;
      chk(ok, $sformatf("%s: error energy rose at code %0d (%f -> %f)", name, c - first, e_prev, e_now));
      e_prev = e_now;
    end
    $display("%s: error energy after %0d codes %f", name, n, e_prev);
  endtask

  initial begin
    longint x [NSEG][];
    ref_code_t cs [$]; bit by_thr;
    int n_exp [NSEG];
    phi = new[NK * LEN];
    for (int m = 0; m < NK; m++) begin
      real g []; gammatone(m, NK, LEN, g);
      for (int j = 0; j < LEN; j++) phi[m * LEN + j] = to_q(g[j]);
    end
    make_ecg(x[0]);
    make_cymbal(x[1]);
    for (int s = 0; s < NSEG; s++) begin
      longint xr []; xr = x[s];
      mp_encode(xr, phi, NK, LEN, 1, K, to_q(0.001), cs, by_thr);
      n_exp[s] = cs.size();
      foreach (cs[i]) exp_codes.push_back(cs[i]);
    end
    chk(n_exp[0] == K && n_exp[1] == K, "reference gives 16 codes per segment");

    repeat (3) @(posedge clk); rst_n = 1;
    for (int m = 0; m < NK; m++) for (int j = 0; j < LEN; j++) begin
      @(negedge clk); kl_en = 1; kl_m = 6'(m); kl_j = 8'(j); kl_data = word_t'(phi[m * LEN + j]);
    end
    @(negedge clk); kl_en = 0;
    cfg_k = CNT_W'(K); cfg_threshold = DATA_W'(to_q(0.001));
    for (int s = 0; s < NSEG; s++)
      for (int n = 0; n < LEN; n++) begin
        @(negedge clk); in_valid = 1; in_data = word_t'(x[s][n]);
        @(posedge clk); while (!in_ready) @(posedge clk);
      end
    @(negedge clk); in_valid = 0;
    while (n_seg_done < NSEG) @(negedge clk);
    repeat (2 * LEN + 10) @(negedge clk);

    chk(exp_codes.size() == 0, $sformatf("%0d codes missing", exp_codes.size()));
    chk(got_codes.size() == 2 * K, $sformatf("%0d codes", got_codes.size()));
    chk(n_spikes == got_codes.size(), $sformatf("%0d spikes for %0d codes", n_spikes, got_codes.size()));
    chk(!itp_pending, "no spike left pending");
    begin
      int used; used = 0;
      foreach (ch_used[i]) used += int'(ch_used[i]);
      $display("spikes per level: %0d / %0d / %0d on %0d channels", n_lvl[0], n_lvl[1], n_lvl[2], used);
    end
    if (got_codes.size() == 2 * K) begin
      check_energy(x[0], 0, K, "ECG-like");
      check_energy(x[1], K, K, "cymbal-like");
      // cycles between successive codes of one segment
      for (int s = 0; s < NSEG; s++)
        for (int i = 1; i < K; i++) begin
          longint gap; gap = code_cyc[s * K + i] - code_cyc[s * K + i - 1];
          chk(gap >= SEARCH && gap < SEARCH + 12 * LEN + 40, $sformatf("cycles per code %0d", gap));
        end
      $display("cycles per code: %0d (search %0d)", code_cyc[1] - code_cyc[0], SEARCH);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
