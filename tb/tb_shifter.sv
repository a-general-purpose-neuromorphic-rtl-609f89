// tb_shifter: with LEN = 64 (window 32..95 of a 96-word Shifter RAM), loads
// a kernel for many time positions, including both extremes, reads the
// window and checks it equals phi[n - d] (zero outside the kernel), checks
// the load and clear pass lengths, and that the RAM is all-zero again
// after a clear (by loading at one extreme and reading at the other).
module tb_shifter;
  import spiketrum_pkg::*;
  localparam int LEN = 64, HALF = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [11:0] tau = 0;
  logic load_start = 0, rom_en, load_done, rd_en = 0, clear_start = 0, clear_done, busy;
  logic [5:0] rom_j, rd_idx = 0; word_t rom_rdata = 0, rd_data;
  shifter #(.LEN(LEN)) dut (.clk, .rst_n, .tau, .load_start, .rom_en, .rom_j, .rom_rdata, .load_done,
    .rd_en, .rd_idx, .rd_data, .clear_start, .clear_done, .busy);
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  word_t phi [LEN];
  // behavioural kernel ROM: one-cycle read
  always @(posedge clk) if (rom_en) rom_rdata <= phi[rom_j];

  task automatic chk(logic cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic do_load(int t);
    int n;
    @(negedge clk); tau = 12'(t); load_start = 1;
    @(negedge clk); load_start = 0; n = 1;
    while (!load_done && n < 1000) begin @(negedge clk); n++; end
    chk(n == LEN + 2, $sformatf("load took %0d cycles", n));
  endtask

  task automatic do_clear(int t);
    int n, expn;
    @(negedge clk); clear_start = 1;
    @(negedge clk); clear_start = 0; n = 1;
    while (!clear_done && n < 1000) begin @(negedge clk); n++; end
    expn = (t + LEN <= LEN + HALF) ? LEN : LEN + HALF - t;
    chk(n == expn + 1, $sformatf("clear took %0d cycles, expected %0d", n, expn + 1));
  endtask

  task automatic check_window(int t, logic zero);
    for (int n = 0; n < LEN; n++) begin
      word_t e; int k;
      k = n - (t - HALF);
      e = (!zero && k >= 0 && k < LEN) ? phi[k] : '0;
      @(negedge clk); rd_en = 1; rd_idx = 6'(n);
      @(negedge clk); rd_en = 0;
      chk(rd_data === e, $sformatf("tau %0d n %0d: %0d vs %0d", t, n, rd_data, e));
    end
  endtask

  initial begin
    for (int i = 0; i < LEN; i++) phi[i] = word_t'(1000 + i * 17 - (i % 5) * 300);
    repeat (3) @(posedge clk); rst_n = 1;
    foreach (phi[i]) ;
    for (int t = 0; t <= 2 * HALF; t += 7) begin
      do_load(t); check_window(t, 0); do_clear(t);
    end
    do_load(2 * HALF); check_window(2 * HALF, 0); do_clear(2 * HALF);
    do_load(0); do_clear(0);
    // after clears, a window read must be all zero
    check_window(HALF, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
