// feedback: the halting check after each code.
//
// One comparator: when a code arrives (code_valid), stop is set if the
// code's intensity magnitude |s| is below the programmable threshold, and
// fb_valid is raised for one cycle (one cycle after code_valid) so the
// controller can either start the next code or end the segment. stop holds
// until the next code. A single comparator against a predefined threshold
// is the paper's; comparing |s| and the strict "<" are this design's.
module feedback
  import spiketrum_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              code_valid,
  input  word_t             s,
  input  logic [DATA_W-1:0] threshold,
  output logic              fb_valid,
  output logic              stop
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fb_valid <= 1'b0;
      stop     <= 1'b0;
    end else begin
      fb_valid <= code_valid;
      if (code_valid) stop <= (word_abs(s) < threshold);
    end
  end

endmodule
