// sp_ram: single-port synchronous RAM (one read or one write per cycle).
//
// Used for the Signal RAM and the Shifter RAM. A write stores wdata at addr
// on the clock edge; a read presents mem[addr] on rdata one cycle after en
// with we low (read latency 1). Contents start at zero, which the shifter
// relies on for its zero-padded window. The single-port organisation follows
// the paper; the latency of one cycle is this design's choice (a block RAM
// without output register).
module sp_ram #(
  parameter int DEPTH = 2048,
  parameter int WIDTH = 34,
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             en,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  initial begin
    for (int i = 0; i < DEPTH; i++) mem[i] = '0;
  end

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end

endmodule
