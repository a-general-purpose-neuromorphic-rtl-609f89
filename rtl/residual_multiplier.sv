// residual_multiplier: scales the shifted kernel by the code intensity.
//
// y = s * phi, shifted right by FRAC_W and saturated to a 34-bit word, so
// that y is in the same fixed-point format as the signal. Both the input
// buses and the output bus pass through three register stages, as the
// paper does around its DSP multiplier to meet timing; the multiplication
// itself sits between them. Latency is therefore 6 cycles from in_valid to
// out_valid, one result per cycle. The scaling and saturation are this
// design's choices.
module residual_multiplier
  import spiketrum_pkg::*;
#(
  parameter int IN_STAGES  = 3,
  parameter int OUT_STAGES = 3
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  word_t s,
  input  word_t phi,
  output logic  out_valid,
  output word_t y
);

  word_t s_pipe   [IN_STAGES];
  word_t phi_pipe [IN_STAGES];
  logic  vin_pipe [IN_STAGES];
  word_t y_pipe   [OUT_STAGES];
  logic  vout_pipe[OUT_STAGES];
  word_t product;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < IN_STAGES; i++) begin
        s_pipe[i]   <= '0;
        phi_pipe[i] <= '0;
        vin_pipe[i] <= 1'b0;
      end
      for (int i = 0; i < OUT_STAGES; i++) begin
        y_pipe[i]    <= '0;
        vout_pipe[i] <= 1'b0;
      end
    end else begin
      s_pipe[0]   <= s;
      phi_pipe[0] <= phi;
      vin_pipe[0] <= in_valid;
      for (int i = 1; i < IN_STAGES; i++) begin
        s_pipe[i]   <= s_pipe[i-1];
        phi_pipe[i] <= phi_pipe[i-1];
        vin_pipe[i] <= vin_pipe[i-1];
      end
      y_pipe[0]    <= product;
      vout_pipe[0] <= vin_pipe[IN_STAGES-1];
      for (int i = 1; i < OUT_STAGES; i++) begin
        y_pipe[i]    <= y_pipe[i-1];
        vout_pipe[i] <= vout_pipe[i-1];
      end
    end
  end

  assign product   = scale_sat(96'(s_pipe[IN_STAGES-1] * phi_pipe[IN_STAGES-1]));
  assign y         = y_pipe[OUT_STAGES-1];
  assign out_valid = vout_pipe[OUT_STAGES-1];

endmodule
