// tb_kernel_elimination: with LEN = 32 and 4 kernels held in a behavioural
// Kernel ROM and Signal RAM, removes a sequence of codes (negative, zero,
// positive and extreme time shifts, negative and saturating intensities)
// from a random segment and checks the whole segment after each run
// against x[n] - (s * phi_m[n - d] >> 24), computed here; checks that the
// run takes between 10*LEN and 12*LEN + 10 cycles.
module tb_kernel_elimination;
  import tb_ref_pkg::*;
  import spiketrum_pkg::*;
  localparam int LEN = 32, HALF = 16, NK = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  logic start = 0, done, kr_en, sig_en, sig_we;
  code_t code = '0;
  logic [5:0] kr_m; logic [4:0] kr_j, sig_addr;
  word_t kr_rdata, sig_wdata, sig_rdata;
  kernel_elimination #(.LEN(LEN)) dut (.clk, .rst_n, .start, .code, .done, .kr_en, .kr_m, .kr_j, .kr_rdata,
    .sig_en, .sig_we, .sig_addr, .sig_wdata, .sig_rdata);

  longint x [LEN];      // model of the Signal RAM contents
  longint xr [LEN];     // reference
  longint phi [NK][LEN];
  always @(posedge clk) begin
    if (kr_en) kr_rdata <= word_t'(phi[kr_m][kr_j]);
    if (sig_en) begin
      if (sig_we) x[sig_addr] <= longint'(sig_wdata);
      else        sig_rdata   <= word_t'(x[sig_addr]);
    end
  end

  task automatic run(int m, int tau, longint s);
    int d, n;
    d = tau - HALF;
    for (int i = 0; i < LEN; i++)
      if (i - d >= 0 && i - d < LEN) xr[i] = sat(wide_t'(xr[i]) - wide_t'(mul_q(s, phi[m][i - d])));
    @(negedge clk); start = 1; code = '{m: 6'(m), tau: 12'(tau), s: 34'(s)};
    @(negedge clk); start = 0; code = '0; n = 1;
    while (!done && n < 100000) begin @(negedge clk); n++; end
    checks++;
    if (n < 10 * LEN || n > 12 * LEN + 10) begin failures++; $display("FAIL: run took %0d cycles", n); end
    for (int i = 0; i < LEN; i++) begin
      checks++;
      if (x[i] != xr[i]) begin
        failures++; $display("FAIL m=%0d tau=%0d n=%0d: %0d, expected %0d", m, tau, i, x[i], xr[i]);
      end
    end
  endtask

  initial begin
    for (int i = 0; i < LEN; i++) begin x[i] = longint'($signed($urandom())) >>> 4; xr[i] = x[i]; end
    for (int m = 0; m < NK; m++) for (int i = 0; i < LEN; i++) phi[m][i] = longint'($signed($urandom())) >>> 10;
    repeat (3) @(posedge clk); rst_n = 1;
    run(0, HALF, 64'sd1 <<< 24);        // d = 0, s = 1.0
    run(1, 3, -(64'sd3 <<< 22));        // d = -13
    run(2, 29, 64'sd5 <<< 23);          // d = +13
    run(3, 0, 64'sd1 <<< 20);           // d = -16 (extreme)
    run(1, 2 * HALF, -(64'sd7 <<< 24)); // d = +16 (extreme)
    run(2, 17, WMAX);                   // saturating product
    run(0, 10, WMIN);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
