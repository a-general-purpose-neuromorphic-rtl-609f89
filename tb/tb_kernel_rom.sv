// tb_kernel_rom: fills a reduced dictionary (8 kernels x 64 samples) through
// the write port, reads it back in random order and checks every word and
// the one-cycle read latency.
module tb_kernel_rom;
  import spiketrum_pkg::*;
  localparam int LEN = 64, NK = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic en = 0, we = 0; logic [5:0] m = 0; logic [5:0] j = 0; word_t wdata = 0, rdata;
  kernel_rom #(.LEN(LEN), .N_K(NK)) dut (.clk, .en, .we, .m, .j, .wdata, .rdata);
  initial begin #1000000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
  function automatic word_t pat(int mm, int jj);
    return word_t'(64'(mm * 1000003 + jj * 7919) ^ (64'(jj) << 20)) - 34'sd12345;
  endfunction
  initial begin
    for (int mm = 0; mm < NK; mm++)
      for (int jj = 0; jj < LEN; jj++) begin
        @(negedge clk); en = 1; we = 1; m = 6'(mm); j = 6'(jj); wdata = pat(mm, jj);
      end
    @(negedge clk); en = 0; we = 0;
    for (int i = 0; i < 2000; i++) begin
      int mm, jj;
      mm = $urandom_range(0, NK - 1); jj = $urandom_range(0, LEN - 1);
      @(negedge clk); en = 1; m = 6'(mm); j = 6'(jj);
      @(negedge clk); en = 0;
      checks++;
      if (rdata !== pat(mm, jj)) begin failures++; $display("FAIL: (%0d,%0d) %h", mm, jj, rdata); end
      // the output holds while en is low
      m = 6'($urandom_range(0, NK - 1));
      @(negedge clk);
      checks++;
      if (rdata !== pat(mm, jj)) begin failures++; $display("FAIL: output not held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
