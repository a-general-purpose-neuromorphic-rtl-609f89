// code_generator: finds the best-matching kernel and time shift.
//
// It watches the stream of convolution results and keeps, with one 34-bit
// comparator, the largest intensity seen so far together with its kernel
// index m and time position tau. start clears it before a new search. When
// the result flagged in_last has been compared, the code (m, tau, s) is
// presented with code_valid for one cycle (one cycle after in_last) and then
// held on `code` until the next start. s keeps its sign, because the
// residual step needs it; the comparison is on magnitude (largest |c|, as
// matching pursuit picks the largest projection), and on a tie the earlier
// result is kept. Comparing magnitudes rather than signed values is this
// design's reading of "maximum convolution intensity".
module code_generator
  import spiketrum_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             in_valid,
  input  logic             in_last,
  input  logic [M_W-1:0]   in_m,
  input  logic [TAU_W-1:0] in_tau,
  input  word_t            in_value,
  output logic             code_valid,
  output code_t            code
);

  logic              have;
  logic [DATA_W-1:0] best_mag, in_mag;
  logic              take;

  assign in_mag = word_abs(in_value);
  assign take   = !have || (in_mag > best_mag);   // the 34-bit comparator

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have       <= 1'b0;
      best_mag   <= '0;
      code       <= '0;
      code_valid <= 1'b0;
    end else begin
      code_valid <= in_valid && in_last;
      if (start) begin
        have     <= 1'b0;
        best_mag <= '0;
      end else if (in_valid && take) begin
        have     <= 1'b1;
        best_mag <= in_mag;
        code     <= '{m: in_m, tau: in_tau, s: in_value};
      end
    end
  end

endmodule
