// tb_subtractor: random and saturating differences; checks value and the
// one-cycle latency.
module tb_subtractor;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid = 0; logic signed [33:0] x = 0, y = 0;
  logic out_valid; logic signed [33:0] x_new;
  subtractor dut (.clk, .rst_n, .in_valid, .x, .y, .out_valid, .x_new);
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      longint xv, yv, e;
      xv = longint'($signed($urandom())) <<< ($urandom_range(0, 2));
      yv = longint'($signed($urandom())) <<< ($urandom_range(0, 2));
      if (i % 40 == 1) begin xv = WMAX - 5; yv = -100; end
      if (i % 40 == 2) begin xv = WMIN + 5; yv = 100; end
      e = sat(wide_t'(xv) - wide_t'(yv));
      @(negedge clk); in_valid = 1; x = 34'(xv); y = 34'(yv);
      @(posedge clk); #1; in_valid = 0;
      checks++;
      if (!out_valid || x_new !== 34'(e)) begin
        failures++; $display("FAIL: %0d - %0d = %0d (valid %0b), expected %0d", xv, yv, x_new, out_valid, e);
      end
      @(posedge clk); #1;
      checks++;
      if (out_valid) begin failures++; $display("FAIL: valid held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
