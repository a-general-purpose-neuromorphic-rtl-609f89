// tb_spiketrum_controller: plays the surrounding blocks (segment source,
// convolution+feedback with a random latency, residual unit) and checks the
// sequence of conv_start / emit / res_start / seg_release for segments that
// end by reaching k, by the threshold stop, and with k = 0; checks that the
// residual step is skipped after the last code and that sel_resid is high
// exactly while the residual unit runs.
module tb_spiketrum_controller;
  import spiketrum_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [CNT_W-1:0] cfg_k = 0;
  logic seg_valid = 0, seg_ready, seg_release, conv_start, fb_valid = 0, fb_stop = 0, emit;
  logic res_start, res_done = 0, sel_resid, busy, stop_thr, stop_cnt;
  logic [CNT_W-1:0] n_codes;
  spiketrum_controller dut (.clk, .rst_n, .cfg_k, .seg_valid, .seg_ready, .seg_release, .conv_start,
    .fb_valid, .fb_stop, .emit, .res_start, .res_done, .sel_resid, .busy, .stop_thr, .stop_cnt, .n_codes);
  initial begin #3000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(logic cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // stop_at: index of the code whose feedback says stop (-1: never)
  task automatic segment(int k, int stop_at);
    int convs, emits, resids, expect_emits, expect_convs, guard;
    logic done;
    convs = 0; emits = 0; resids = 0; done = 0; guard = 0;
    @(negedge clk); cfg_k = CNT_W'(k); seg_valid = 1;
    while (!seg_ready) @(negedge clk);
    @(negedge clk); seg_valid = 0;  // accepted on the edge just passed
    while (!done && guard < 20000) begin
      guard++;
      if (conv_start) begin
        int lat; lat = $urandom_range(1, 20);
        chk(!sel_resid, "sel_resid low during search");
        convs++;
        repeat (lat) @(negedge clk);
        fb_valid = 1; fb_stop = (convs - 1 == stop_at);
        @(negedge clk); fb_valid = 0; fb_stop = 0;
        continue;
      end
      if (emit) emits++;
      if (res_start) begin
        int lat; lat = $urandom_range(1, 30);
        resids++;
        @(negedge clk);
        repeat (lat) begin chk(sel_resid, "sel_resid high during residual"); @(negedge clk); end
        res_done = 1; @(negedge clk); res_done = 0;
        continue;
      end
      if (seg_release) done = 1;
      @(negedge clk);
    end
    if (k == 0) begin expect_emits = 0; expect_convs = 0; end
    else if (stop_at >= 0 && stop_at < k) begin expect_emits = stop_at; expect_convs = stop_at + 1; end
    else begin expect_emits = k; expect_convs = k; end
    chk(done, "segment released");
    chk(emits == expect_emits, $sformatf("k=%0d stop=%0d: %0d codes, expected %0d", k, stop_at, emits, expect_emits));
    chk(convs == expect_convs, $sformatf("k=%0d stop=%0d: %0d searches, expected %0d", k, stop_at, convs, expect_convs));
    chk(resids == ((expect_emits > 0 && expect_convs == expect_emits) ? expect_emits - 1 : expect_emits),
        $sformatf("k=%0d stop=%0d: %0d residual runs", k, stop_at, resids));
    chk(n_codes == CNT_W'(expect_emits), "n_codes");
    @(negedge clk);
    chk(!busy && seg_ready, "idle after segment");
  endtask

  int n_thr = 0, n_cnt = 0;
  always @(posedge clk) begin
    if (rst_n && stop_thr) n_thr++;
    if (rst_n && stop_cnt) n_cnt++;
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    segment(1, -1); segment(4, -1); segment(5, 2); segment(3, 0); segment(0, -1);
    segment(9, 8); segment(16, 20);
    chk(n_thr == 3, $sformatf("threshold stops %0d", n_thr));
    chk(n_cnt == 4, $sformatf("count stops %0d", n_cnt));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
