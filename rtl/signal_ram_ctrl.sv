// signal_ram_ctrl: the Signal RAM and its controller.
//
// The Signal RAM is a single-port RAM of LEN 34-bit words (2048 x 34 bits =
// 8.7 kB by default) that holds one input segment and, later, its successive
// residuals. The controller has three phases:
//   CAPTURE  input samples arrive on a valid/ready stream and are written to
//            addresses 0..LEN-1 in order;
//   FULL     the segment is complete; seg_valid is raised and held until the
//            encoder side is idle and answers with seg_ready (the hand-shake
//            that passes the segment to the MACC side);
//   ENCODE   the encoder owns the single port through eng_* (reads for the
//            convolution, reads and write-backs for the residual) until it
//            pulses seg_release, which returns the RAM to CAPTURE.
// in_ready is low outside CAPTURE, so a source is held back while a segment
// is encoded (there is one buffer, as in the paper). Read latency is one
// cycle. Phases and the hand-shake follow the paper's description; the
// stream protocol and the single-buffer back-pressure are this design's.
module signal_ram_ctrl
  import spiketrum_pkg::*;
#(
  parameter int LEN = SEG_LEN,
  localparam int AW = $clog2(LEN)
) (
  input  logic          clk,
  input  logic          rst_n,
  // input sample stream
  input  logic          in_valid,
  output logic          in_ready,
  input  word_t         in_data,
  // segment hand-shake with the controller
  output logic          seg_valid,
  input  logic          seg_ready,
  input  logic          seg_release,
  // encoder access port (used in ENCODE only)
  input  logic          eng_en,
  input  logic          eng_we,
  input  logic [AW-1:0] eng_addr,
  input  word_t         eng_wdata,
  output word_t         rdata
);

  typedef enum logic [1:0] {CAPTURE, FULL, ENCODE} phase_t;
  phase_t        phase;
  logic [AW-1:0] wptr;

  logic          ram_en, ram_we;
  logic [AW-1:0] ram_addr;
  word_t         ram_wdata;

  assign in_ready  = (phase == CAPTURE);
  assign seg_valid = (phase == FULL);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= CAPTURE;
      wptr  <= '0;
    end else begin
      unique case (phase)
        CAPTURE: if (in_valid) begin
          wptr <= wptr + 1'b1;
          if (wptr == AW'(LEN - 1)) phase <= FULL;
        end
        FULL:    if (seg_ready) phase <= ENCODE;
        ENCODE:  if (seg_release) begin
          phase <= CAPTURE;
          wptr  <= '0;
        end
        default: phase <= CAPTURE;
      endcase
    end
  end

  always_comb begin
    if (phase == CAPTURE) begin
      ram_en    = in_valid;
      ram_we    = 1'b1;
      ram_addr  = wptr;
      ram_wdata = in_data;
    end else begin
      ram_en    = eng_en && (phase == ENCODE);
      ram_we    = eng_we;
      ram_addr  = eng_addr;
      ram_wdata = eng_wdata;
    end
  end

  sp_ram #(.DEPTH(LEN), .WIDTH(DATA_W)) u_ram (
    .clk  (clk),
    .en   (ram_en),
    .we   (ram_we),
    .addr (ram_addr),
    .wdata(ram_wdata),
    .rdata(rdata)
  );

  // Stream rule: a sample offered and not taken stays offered, unchanged.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (in_valid && !in_ready) |=> (in_valid && $stable(in_data)))
    else $error("signal_ram_ctrl: input sample withdrawn or changed while stalled");
  // The encoder may only use the RAM once it owns it.
  assert property (@(posedge clk) disable iff (!rst_n) eng_en |-> (phase == ENCODE))
    else $error("signal_ram_ctrl: encoder access outside ENCODE");

endmodule
