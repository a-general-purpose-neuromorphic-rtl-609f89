// tb_residual_multiplier: random and saturating products, one per cycle with
// gaps; checks values and the 6-cycle latency (three input and three output
// register stages).
module tb_residual_multiplier;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic in_valid = 0; logic signed [33:0] s = 0, phi = 0;
  logic out_valid; logic signed [33:0] y;
  residual_multiplier dut (.clk, .rst_n, .in_valid, .s, .phi, .out_valid, .y);

  longint ev[$]; int ec[$];
  always @(posedge clk) if (out_valid) begin
    longint e; int c;
    checks++;
    e = ev.pop_front(); c = ec.pop_front();
    if (y !== 34'(e) || cyc != c) begin
      failures++; $display("FAIL: y=%0d at %0d, expected %0d at %0d", y, cyc, e, c);
    end
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    for (int i = 0; i < 200; i++) begin
      longint sv, pv;
      sv = longint'($signed($urandom())) >>> (i % 8);
      pv = longint'($signed($urandom())) >>> 6;
      if (i % 50 == 7) begin sv = WMAX; pv = WMAX; end
      if (i % 50 == 8) begin sv = WMIN; pv = WMAX; end
      in_valid <= 1; s <= 34'(sv); phi <= 34'(pv);
      ev.push_back(mul_q(sv, pv)); ec.push_back(cyc + 7);
      @(posedge clk);
      if (i % 13 == 0) begin in_valid <= 0; @(posedge clk); end
    end
    in_valid <= 0; repeat (10) @(posedge clk);
    checks++; if (ev.size() != 0) begin failures++; $display("FAIL: results missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
