// spiketrum_controller: the iteration sequencer of the encoder.
//
// One segment is encoded as a loop of matching-pursuit iterations:
//   IDLE   wait for a full segment (seg_valid); being idle, answer with
//          seg_ready - this is the hand-shake that hands the segment over;
//   CONV   start the convolution search (conv_start) and wait for the
//          feedback verdict on the resulting code (fb_valid);
//          - stop set   : the code is below threshold, discard it, finish;
//          - otherwise  : pass the code on (emit), count it; if k codes
//                         have been made, finish, else remove it (RESID);
//   RESID  start kernel elimination (res_start) and wait for res_done,
//          then search again (CONV);
//   FINISH release the Signal RAM (seg_release) and return to IDLE.
// k (cfg_k) is sampled when a segment is accepted; k = 0 encodes nothing.
// sel_resid tells the shared memory ports who owns them. stop_thr and
// stop_cnt pulse for one cycle when a segment ends for either reason.
// The loop, the stop signal from the feedback block and the k-iteration
// limit are the paper's; skipping the residual step after the last code
// and discarding the below-threshold code are this design's choices.
module spiketrum_controller
  import spiketrum_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic [CNT_W-1:0] cfg_k,
  // segment hand-shake with the Signal RAM controller
  input  logic             seg_valid,
  output logic             seg_ready,
  output logic             seg_release,
  // feature extraction
  output logic             conv_start,
  input  logic             fb_valid,
  input  logic             fb_stop,
  output logic             emit,
  // residual computing
  output logic             res_start,
  input  logic             res_done,
  output logic             sel_resid,
  // status
  output logic             busy,
  output logic             stop_thr,
  output logic             stop_cnt,
  output logic [CNT_W-1:0] n_codes
);

  typedef enum logic [2:0] {IDLE, CONV, RESID, FINISH} state_t;
  state_t           state;
  logic [CNT_W-1:0] k_q;

  assign seg_ready = (state == IDLE);
  assign sel_resid = (state == RESID);
  assign busy      = (state != IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= IDLE;
      k_q         <= '0;
      n_codes     <= '0;
      conv_start  <= 1'b0;
      res_start   <= 1'b0;
      emit        <= 1'b0;
      seg_release <= 1'b0;
      stop_thr    <= 1'b0;
      stop_cnt    <= 1'b0;
    end else begin
      conv_start  <= 1'b0;
      res_start   <= 1'b0;
      emit        <= 1'b0;
      seg_release <= 1'b0;
      stop_thr    <= 1'b0;
      stop_cnt    <= 1'b0;
      unique case (state)
        IDLE: if (seg_valid) begin
          k_q     <= cfg_k;
          n_codes <= '0;
          if (cfg_k == '0) begin
            state    <= FINISH;
            stop_cnt <= 1'b1;
          end else begin
            state      <= CONV;
            conv_start <= 1'b1;
          end
        end
        CONV: if (fb_valid) begin
          if (fb_stop) begin
            state    <= FINISH;
            stop_thr <= 1'b1;
          end else begin
            emit    <= 1'b1;
            n_codes <= n_codes + 1'b1;
            if (n_codes + 1'b1 == k_q) begin
              state    <= FINISH;
              stop_cnt <= 1'b1;
            end else begin
              state     <= RESID;
              res_start <= 1'b1;
            end
          end
        end
        RESID: if (res_done) begin
          state      <= CONV;
          conv_start <= 1'b1;
        end
        FINISH: begin
          state       <= IDLE;
          seg_release <= 1'b1;
        end
        default: state <= IDLE;
      endcase
    end
  end

endmodule
