// subtractor: removes the scaled, shifted kernel from the segment.
//
// x_new = x - y, saturated to a 34-bit word, registered: out_valid and
// x_new follow in_valid by one cycle. Plain fabric logic, as in the paper;
// the saturation is this design's choice.
module subtractor
  import spiketrum_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  word_t x,
  input  word_t y,
  output logic  out_valid,
  output word_t x_new
);

  logic signed [DATA_W:0] diff;
  assign diff = (DATA_W+1)'(x) - (DATA_W+1)'(y);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      x_new     <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        if (diff > (DATA_W+1)'(WORD_MAX))      x_new <= WORD_MAX;
        else if (diff < (DATA_W+1)'(WORD_MIN)) x_new <= WORD_MIN;
        else                                   x_new <= word_t'(diff);
      end
    end
  end

endmodule
