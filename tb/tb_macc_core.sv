// tb_macc_core: random dot products of random lengths through the MACC core,
// back to back, checked against wide reference sums; checks the 2-cycle
// latency from the last product to out_valid and the tag.
module tb_macc_core;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_first = 0, in_last = 0;
  logic [7:0] in_tag = 0;
  logic signed [33:0] a = 0, b = 0;
  logic out_valid; logic signed [33:0] out_value; logic [7:0] out_tag;

  macc_core #(.TAG_W(8)) dut (.clk, .rst_n, .in_valid, .in_first, .in_last, .in_tag,
                              .a, .b, .out_valid, .out_value, .out_tag);

  longint exp_val[$]; int exp_tag[$]; int exp_cyc[$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (out_valid) begin
    longint e; int t, c;
    checks++;
    e = exp_val.pop_front(); t = exp_tag.pop_front(); c = exp_cyc.pop_front();
    if (out_value !== 34'(e) || out_tag !== 8'(t) || cyc != c) begin
      failures++;
      $display("FAIL sum: got %0d tag %0d at %0d, expected %0d tag %0d at %0d",
               out_value, out_tag, cyc, e, t, c);
    end
  end

  initial begin
    #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int s = 0; s < 60; s++) begin
      int n; wide_t acc; longint av, bv;
      n = 1 + $urandom_range(0, 40);
      acc = 0;
      for (int i = 0; i < n; i++) begin
        // mostly moderate values; some full-range ones to reach saturation
        if (s % 10 == 9) begin av = WMAX - $urandom_range(0, 3); bv = WMAX; end
        else begin
          av = longint'($signed($urandom_range(0, 32'hFFFFFF) - 32'h800000)) * 4;
          bv = longint'($signed($urandom_range(0, 32'hFFFFFF) - 32'h800000));
        end
        acc += wide_t'(av) * wide_t'(bv);
        in_valid <= 1; in_first <= (i == 0); in_last <= (i == n - 1);
        in_tag <= 8'(s); a <= 34'(av); b <= 34'(bv);
        if (i == n - 1) begin
          exp_val.push_back(sat(acc >>> FRAC)); exp_tag.push_back(s);
          exp_cyc.push_back(cyc + 3);
        end
        @(posedge clk);
      end
      if (s % 7 == 3) begin in_valid <= 0; repeat (2) @(posedge clk); end
    end
    in_valid <= 0;
    repeat (10) @(posedge clk);
    checks++;
    if (exp_val.size() != 0) begin failures++; $display("FAIL: %0d sums missing", exp_val.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
