// kernel_rom: Time-Domain Kernel ROM, the store of the Gammatone dictionary.
//
// Holds N_K kernels of LEN 34-bit samples each (40 x 2048 by default,
// 348,160 bytes). It is a single-port memory: one access per cycle, selected
// by kernel index m and sample index j; the word address is m*LEN + j.
// A read (en=1, we=0) returns the sample on rdata one cycle later.
// The paper names the block a ROM filled with precomputed kernels but does
// not give the kernels; here the same single port can also be written
// (en=1, we=1) so that a host can load the dictionary before encoding, which
// matches the chip version where this store sits off-chip.
module kernel_rom
  import spiketrum_pkg::*;
#(
  parameter int LEN = SEG_LEN,
  parameter int N_K = N_KERN,
  localparam int JW = $clog2(LEN),
  localparam int DEPTH = LEN * N_K,
  localparam int AW = $clog2(DEPTH)
) (
  input  logic           clk,
  input  logic           en,
  input  logic           we,
  input  logic [M_W-1:0] m,
  input  logic [JW-1:0]  j,
  input  word_t          wdata,
  output word_t          rdata
);

  word_t mem [DEPTH];
  logic [AW-1:0] addr;

  assign addr = AW'(m) * AW'(LEN) + AW'(j);

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end

  // A kernel index beyond the dictionary is a caller error.
  assert property (@(posedge clk) en |-> (int'(m) < N_K))
    else $error("kernel_rom: kernel index %0d out of range", m);

endmodule
