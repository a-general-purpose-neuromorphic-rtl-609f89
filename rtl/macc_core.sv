// macc_core: the multiply-accumulate core of the time-domain convolution.
//
// Structure as drawn for the area-optimized design: a multiplier, an adder
// and an accumulator register fed back into the adder (one DSP slice on the
// FPGA). One product a*b enters per cycle. in_first starts a new sum (the
// accumulator is loaded instead of added to), in_last ends it. The full
// 79-bit sum is kept; when a sum ends it is shifted right by FRAC_W and
// saturated to a 34-bit word, and presented with out_valid for one cycle,
// together with the tag that came in with its last product.
// Timing: product register, then accumulator register: out_valid follows the
// in_last input by 2 cycles; sums may follow one another back to back.
// The word widths are the paper's; the pipeline depth and the scaling and
// saturation are this design's choices.
module macc_core
  import spiketrum_pkg::*;
#(
  parameter int TAG_W = 1,
  parameter int ACC_W = 2 * DATA_W + 11
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic             in_first,
  input  logic             in_last,
  input  logic [TAG_W-1:0] in_tag,
  input  word_t            a,
  input  word_t            b,
  output logic             out_valid,
  output word_t            out_value,
  output logic [TAG_W-1:0] out_tag
);

  logic signed [2*DATA_W-1:0] prod;
  logic                       p_valid, p_first, p_last;
  logic [TAG_W-1:0]           p_tag;
  logic signed [ACC_W-1:0]    acc, acc_next;

  // multiplier stage
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_valid <= 1'b0;
      p_first <= 1'b0;
      p_last  <= 1'b0;
      p_tag   <= '0;
      prod    <= '0;
    end else begin
      p_valid <= in_valid;
      p_first <= in_first;
      p_last  <= in_last;
      p_tag   <= in_tag;
      prod    <= a * b;
    end
  end

  // adder and accumulator register
  assign acc_next = p_first ? ACC_W'(prod) : acc + ACC_W'(prod);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      out_valid <= 1'b0;
      out_value <= '0;
      out_tag   <= '0;
    end else begin
      out_valid <= p_valid && p_last;
      if (p_valid) begin
        acc <= acc_next;
        if (p_last) begin
          out_value <= scale_sat(96'(acc_next));
          out_tag   <= p_tag;
        end
      end
    end
  end

endmodule
