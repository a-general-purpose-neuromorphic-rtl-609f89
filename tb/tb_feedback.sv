// tb_feedback: |s| against the threshold for values below, equal, above and
// negative; checks stop and the one-cycle fb_valid.
module tb_feedback;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic code_valid = 0; logic signed [33:0] s = 0; logic [33:0] threshold = 0;
  logic fb_valid, stop;
  feedback dut (.clk, .rst_n, .code_valid, .s, .threshold, .fb_valid, .stop);
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic one(longint sv, longint th);
    logic e;
    e = mag(sv) < th;
    @(negedge clk); code_valid = 1; s = 34'(sv); threshold = 34'(th);
    @(negedge clk); code_valid = 0;
    checks++;
    if (!fb_valid || stop !== e) begin
      failures++; $display("FAIL: s=%0d th=%0d stop=%0b valid=%0b expected %0b", sv, th, stop, fb_valid, e);
    end
    @(negedge clk);
    checks++;
    if (fb_valid || stop !== e) begin failures++; $display("FAIL: fb_valid held or stop changed"); end
  endtask
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    one(100, 101); one(101, 101); one(102, 101); one(-100, 101); one(-101, 101);
    one(WMIN, WMAX); one(0, 0); one(0, 1);
    for (int i = 0; i < 100; i++)
      one(longint'($signed($urandom())), longint'($urandom_range(0, 32'h7FFFFFFF)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
