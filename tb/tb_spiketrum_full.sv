// tb_spiketrum_full: one segment through the encoder at its default size
// (2048-sample segments, 40 Gammatone kernels, 120 channels, every shift).
//
// The 40-kernel dictionary is computed here and loaded; the segment holds
// two kernels at different shifts and amplitudes. Two codes are requested.
// Each code is compared with a matching-pursuit reference computed here,
// each spike with its code's channel and delay, and the cycles between the
// two codes with the full search length of 125,870,080 MACs plus the
// residual step.
module tb_spiketrum_full;
  import tb_ref_pkg::*;
  import spiketrum_pkg::*;
  localparam int LEN = 2048, HALF = 1024, NK = 40, NCH = 120;
  localparam longint SEARCH = 64'd40 * (64'd2049 * 64'd2048 - 64'd1024 * 64'd1025);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin #4000000000; failures++; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  logic in_valid = 0, in_ready; word_t in_data = 0;
  logic kl_en = 0; logic [5:0] kl_m = 0; logic [10:0] kl_j = 0; word_t kl_data = 0;
  logic [CNT_W-1:0] cfg_k = 0; logic [DATA_W-1:0] cfg_threshold = 0;
  logic itp_tick = 1;
  logic [NCH-1:0] spikes;
  logic code_valid, seg_done, stop_thr, stop_cnt, itp_overflow, itp_pending, busy;
  code_t code_out; logic [CNT_W-1:0] n_codes;

  spiketrum_top dut (.clk, .rst_n, .in_valid, .in_ready, .in_data, .kl_en, .kl_m,
    .kl_j, .kl_data, .cfg_k, .cfg_threshold, .itp_tick, .spikes, .code_valid, .code_out, .seg_done,
    .stop_thr, .stop_cnt, .itp_overflow, .itp_pending, .n_codes, .busy);

  task automatic chk(logic cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  longint phi [];
  ref_code_t exp_codes [$];
  longint code_cyc [$];
  int n_spikes = 0, pend_ch = -1, pend_tau = 0; longint pend_cyc = 0;

  always @(posedge clk) if (rst_n) begin
    if (code_valid) begin
      ref_code_t e;
      code_cyc.push_back(cyc);
      checks++;
      if (exp_codes.size() == 0) begin failures++; $display("FAIL: unexpected code"); end
      else begin
        e = exp_codes.pop_front();
        $display("code m=%0d tau=%0d s=%f at cycle %0d", code_out.m, code_out.tau,
                 real'(code_out.s) / real'(1 << FRAC), cyc);
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
      // tick every cycle: the spike leaves tau + 3 cycles after code_valid
      if (pend_ch < 0 || !spikes[pend_ch] || $countones(spikes) != 1 || cyc - pend_cyc != longint'(pend_tau + 3)) begin
        failures++; $display("FAIL: spike %h at %0d, expected channel %0d at %0d", spikes, cyc, pend_ch, pend_cyc + pend_tau + 3);
      end
    end
  end

  initial begin
    longint x [];
    ref_code_t cs [$]; bit by_thr;
    real a [2]; int mm [2], dd [2];
    phi = new[NK * LEN];
    for (int m = 0; m < NK; m++) begin
      real g []; gammatone(m, NK, LEN, g);
      for (int j = 0; j < LEN; j++) phi[m * LEN + j] = to_q(g[j]);
    end
    // segment: 2.0 * kernel 12 shifted by +300, 0.4 * kernel 3 shifted by -100
    a = '{2.0, 0.4}; mm = '{12, 3}; dd = '{300, -100};
    x = new[LEN];
    for (int n = 0; n < LEN; n++) begin
      real v; v = 0.0;
      for (int i = 0; i < 2; i++)
        if (n - dd[i] >= 0 && n - dd[i] < LEN) v += a[i] * real'(phi[mm[i] * LEN + n - dd[i]]) / real'(1 << FRAC);
      x[n] = to_q(v);
    end
    begin
      longint xr []; xr = x;
      mp_encode(xr, phi, NK, LEN, 1, 2, to_q(0.001), cs, by_thr);
      foreach (cs[i]) exp_codes.push_back(cs[i]);
    end
    chk(cs.size() == 2, "reference gives two codes");

    repeat (3) @(posedge clk); rst_n = 1;
    for (int m = 0; m < NK; m++) for (int j = 0; j < LEN; j++) begin
      @(negedge clk); kl_en = 1; kl_m = 6'(m); kl_j = 11'(j); kl_data = word_t'(phi[m * LEN + j]);
    end
    @(negedge clk); kl_en = 0;
    cfg_k = 2; cfg_threshold = DATA_W'(to_q(0.001));
    for (int n = 0; n < LEN; n++) begin
      @(negedge clk); in_valid = 1; in_data = word_t'(x[n]);
      @(posedge clk); while (!in_ready) @(posedge clk);
    end
    @(negedge clk); in_valid = 0;
    while (!seg_done) @(negedge clk);
    repeat (2 * LEN + 10) @(negedge clk);
    chk(exp_codes.size() == 0, "all codes came");
    chk(n_spikes == 2, $sformatf("%0d spikes", n_spikes));
    chk(!itp_pending, "no spike left pending");
    if (code_cyc.size() == 2) begin
      longint gap; gap = code_cyc[1] - code_cyc[0];
      $display("cycles between codes: %0d (search %0d)", gap, SEARCH);
      chk(gap >= SEARCH && gap < SEARCH + 12 * LEN + 40, "cycles per code");
    end else chk(0, "two codes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
