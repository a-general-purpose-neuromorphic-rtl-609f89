// itp_delay: the delay element of one output channel (one "fibre").
//
// load arms the element with a delay of `delay` ticks; each tick counts it
// down; when it has reached zero the element emits a one-cycle spike and is
// free again. A delay of 0 fires on the cycle after load, a delay of D fires
// after the D-th tick. An armed element ignores a new load and reports it on
// collide for one cycle (it holds one pending spike). `tick` is the time base
// of the spike trains, typically the input sample strobe. The paper gives
// one delay per channel that waits the code's time shift; the tick input and
// the collision rule are this design's.
module itp_delay
  import spiketrum_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             tick,
  input  logic             load,
  input  logic [TAU_W-1:0] delay,
  output logic             busy,
  output logic             spike,
  output logic             collide
);

  logic [TAU_W-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      cnt     <= '0;
      spike   <= 1'b0;
      collide <= 1'b0;
    end else begin
      spike   <= 1'b0;
      collide <= load && busy;
      if (busy) begin
        if (cnt == '0) begin
          spike <= 1'b1;
          busy  <= 1'b0;
        end else if (tick) begin
          cnt <= cnt - 1'b1;
        end
      end else if (load) begin
        busy <= 1'b1;
        cnt  <= delay;
      end
    end
  end

endmodule
