// tb_code_generator: streams of random results (including ties and negative
// maxima) and checks that the code holds the largest magnitude, its m and
// tau, the earlier one on a tie, and that code_valid follows in_last by one
// cycle.
module tb_code_generator;
  import tb_ref_pkg::*;
  import spiketrum_pkg::code_t;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start = 0, in_valid = 0, in_last = 0;
  logic [5:0] in_m = 0; logic [11:0] in_tau = 0; logic signed [33:0] in_value = 0;
  logic code_valid; code_t code;
  code_generator dut (.clk, .rst_n, .start, .in_valid, .in_last, .in_m, .in_tau, .in_value, .code_valid, .code);
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int r = 0; r < 40; r++) begin
      int n; longint best; int bm, bt;
      n = 1 + $urandom_range(0, 200);
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      best = -1;
      for (int i = 0; i < n; i++) begin
        longint v; int m, t;
        v = longint'($signed($urandom())) >>> $urandom_range(0, 20);
        if (r % 5 == 1 && i == n / 2) v = WMIN;                  // saturating magnitude
        if (r % 5 == 2 && i > 0 && i == n - 1) v = (best == WMAX) ? WMIN : -best;  // tie, later loses
        m = $urandom_range(0, 39); t = $urandom_range(0, 2048);
        if (mag(v) > best) begin best = mag(v); bm = m; bt = t; end
        in_valid = 1; in_last = (i == n - 1); in_m = 6'(m); in_tau = 12'(t); in_value = 34'(v);
        @(negedge clk);
        // gaps inside the stream are allowed
        if (i % 17 == 5 && i != n - 1) begin in_valid = 0; in_last = 0; @(negedge clk); end
        checks++;
        if (code_valid !== (i == n - 1)) begin failures++; $display("FAIL: code_valid timing"); end
      end
      in_valid = 0; in_last = 0;
      checks++;
      if (mag(code.s) != best || code.m != 6'(bm) || code.tau != 12'(bt)) begin
        failures++; $display("FAIL run %0d: got |s|=%0d m=%0d tau=%0d, expected %0d %0d %0d",
                             r, mag(code.s), code.m, code.tau, best, bm, bt);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
