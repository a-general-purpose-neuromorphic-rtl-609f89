// tb_itp_delay: arms the delay with several values, with a tick every cycle
// and with a sparse tick, and checks that the spike comes after exactly
// `delay` ticks; checks that a load while armed is reported and ignored.
module tb_itp_delay;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic tick = 0, load = 0; logic [11:0] delay = 0;
  logic busy, spike, collide;
  itp_delay dut (.clk, .rst_n, .tick, .load, .delay, .busy, .spike, .collide);
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  int period;   // tick every `period` cycles
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always_comb tick = (period != 0) && (cyc % period == 0);

  task automatic run(int d, int p);
    int ticks, guard, pend;
    period = p;
    @(negedge clk); load = 1; delay = 12'(d);
    @(negedge clk); load = 0;
    // a tick counts if the edge that samples it is not the spike edge
    ticks = 0; guard = 0; pend = int'(tick);
    forever begin
      @(negedge clk); guard++;
      if (spike || guard > 100000) break;
      ticks += pend; pend = int'(tick);
    end
    checks++;
    if (ticks != d) begin failures++; $display("FAIL: delay %0d period %0d: spike after %0d ticks", d, p, ticks); end
    @(negedge clk);
    checks++;
    if (spike || busy) begin failures++; $display("FAIL: spike longer than one cycle"); end
  endtask

  initial begin
    period = 1;
    repeat (3) @(posedge clk); rst_n = 1;
    run(0, 1); run(1, 1); run(5, 1); run(1024, 1); run(2048, 1);
    run(7, 3); run(20, 5); run(3, 2);
    // collision: arm with 50, try again with 3
    period = 1;
    @(negedge clk); load = 1; delay = 50;
    @(negedge clk); delay = 3;
    @(negedge clk); load = 0;
    checks++;
    if (!collide) begin failures++; $display("FAIL: no collide on load while armed"); end
    begin
      int n; n = 0;
      while (!spike && n < 1000) begin @(negedge clk); n++; end
      checks++;
      if (n < 45) begin failures++; $display("FAIL: second load replaced the first (%0d)", n); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
