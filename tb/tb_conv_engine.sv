// tb_conv_engine: a reduced search (LEN = 32, 3 kernels) with every shift and
// with a shift step of 5, against a reference correlation computed here;
// checks every result, its (m, tau), their order, the number of results and
// the cycle count: done follows start by T + 2 cycles, T being the number of
// products (one MAC per cycle).
module tb_conv_engine;
  import tb_ref_pkg::*;
  import spiketrum_pkg::word_t;
  localparam int LEN = 32, HALF = 16, NK = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  longint x [LEN];
  longint phi [NK][LEN];

  // two engines: every shift, and every 5th shift
  for (genvar g = 0; g < 2; g++) begin : g_eng
    localparam int STEP = (g == 0) ? 1 : 5;
    logic start = 0, busy, sig_en, kr_en, res_valid, done;
    logic [4:0] sig_addr, kr_j; logic [5:0] kr_m, res_m; logic [11:0] res_tau;
    word_t sig_rdata, kr_rdata, res_value;
    conv_engine #(.LEN(LEN), .N_K(NK), .STEP(STEP)) dut (.clk, .rst_n, .start, .busy, .sig_en, .sig_addr,
      .sig_rdata, .kr_en, .kr_m, .kr_j, .kr_rdata, .res_valid, .res_m, .res_tau, .res_value, .done);
    always @(posedge clk) begin
      if (sig_en) sig_rdata <= word_t'(x[sig_addr]);
      if (kr_en)  kr_rdata  <= word_t'(phi[kr_m][kr_j]);
    end

    int nres = 0, exp_m = 0, exp_tau = 0, t0 = 0, tdone = -1;
    always @(posedge clk) if (rst_n && res_valid) begin
      wide_t acc; int d;
      d = exp_tau - HALF;
      acc = 0;
      for (int n = 0; n < LEN; n++)
        if (n - d >= 0 && n - d < LEN) acc += wide_t'(x[n]) * wide_t'(phi[exp_m][n - d]);
      checks++;
      if (res_m != 6'(exp_m) || res_tau != 12'(exp_tau) || res_value !== 34'(sat(acc >>> FRAC))) begin
        failures++;
        $display("FAIL step %0d: (%0d,%0d)=%0d, expected (%0d,%0d)=%0d", STEP, res_m, res_tau, res_value,
                 exp_m, exp_tau, sat(acc >>> FRAC));
      end
      nres++;
      if (done) tdone = cyc;
      exp_tau += STEP;
      if (exp_tau > 2 * HALF) begin exp_tau = 0; exp_m++; end
    end
  end

  function automatic int products(int step);
    int t; t = 0;
    for (int m = 0; m < NK; m++)
      for (int tau = 0; tau <= 2 * HALF; tau += step) begin
        int d; d = tau - HALF;
        t += LEN - ((d < 0) ? -d : d);
      end
    return t;
  endfunction

  initial begin
    for (int n = 0; n < LEN; n++) x[n] = longint'($signed($urandom())) >>> 6;
    for (int m = 0; m < NK; m++) for (int n = 0; n < LEN; n++) phi[m][n] = longint'($signed($urandom())) >>> 8;
    x[3] = WMAX; phi[1][3] = WMAX; phi[1][4] = WMAX;   // some saturating sums
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); g_eng[0].start = 1; g_eng[1].start = 1; g_eng[0].t0 = cyc + 1; g_eng[1].t0 = cyc + 1;
    @(negedge clk); g_eng[0].start = 0; g_eng[1].start = 0;
    wait (!g_eng[0].busy && !g_eng[1].busy);
    repeat (5) @(negedge clk);
    checks++;
    if (g_eng[0].nres != NK * (2 * HALF + 1)) begin failures++; $display("FAIL: %0d results", g_eng[0].nres); end
    checks++;
    if (g_eng[1].nres != NK * (2 * HALF / 5 + 1)) begin failures++; $display("FAIL: %0d results (step 5)", g_eng[1].nres); end
    checks++;
    if (g_eng[0].tdone - g_eng[0].t0 != products(1) + 2) begin
      failures++; $display("FAIL: done after %0d cycles, expected %0d", g_eng[0].tdone - g_eng[0].t0, products(1) + 2);
    end
    checks++;
    if (g_eng[1].tdone - g_eng[1].t0 != products(5) + 2) begin
      failures++; $display("FAIL: step 5 done after %0d cycles, expected %0d", g_eng[1].tdone - g_eng[1].t0, products(5) + 2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
