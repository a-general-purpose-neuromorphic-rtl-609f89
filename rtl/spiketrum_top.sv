// spiketrum_top: area-optimized Spiketrum spike encoder.
//
// Turns a sampled signal into spike trains on N_K*3 channels (120 by
// default). Segments of LEN samples (2048) are captured into the Signal RAM.
// Each segment is then encoded by matching pursuit over a dictionary of N_K
// time-domain kernels (40 Gammatone kernels in the Kernel ROM):
//   Feature Extraction  conv_engine correlates the segment with every kernel
//                       at every time shift through one MACC core;
//                       code_generator keeps the best (m, tau, s);
//                       feedback stops when |s| drops below cfg_threshold;
//   Residual Computing  kernel_elimination subtracts s*phi_m(t - d) from the
//                       segment in place (shifter, multiplier, subtractor);
//   Intensity-to-Place  spike_generator turns each accepted code into one
//                       spike on channel 3m + level(s), tau ticks later;
// and spiketrum_controller repeats search and removal up to cfg_k times.
// Interface:
//   in_valid/in_ready/in_data  34-bit Q9.24 samples; in_ready is low while a
//                              segment is being encoded (single buffer);
//   kl_en/kl_m/kl_j/kl_data    write port to load the kernel dictionary;
//                              allowed only while busy is low;
//   cfg_k, cfg_threshold       codes per segment and halting threshold (|s|
//                              in Q9.24); cfg_k is sampled per segment;
//   itp_tick                   time base of the spike delays;
//   spikes                     one-cycle spike per channel;
//   code_valid/code_out        each accepted code, for observation;
//   seg_done, stop_thr, stop_cnt, itp_overflow, itp_pending, n_codes
//                              (codes made in this segment), busy: status.
// Timing: one code costs one full search, N_K*((LEN+1)*LEN - (LEN/2)*(LEN/2+1))
// MAC cycles at STEP = 1 (125,870,080 by default, 0.63 s at 200 MHz), plus about
// 12*LEN cycles of residual computation. The architecture is the paper's;
// the port protocols, number format and sequencing details are this
// design's, as listed in each block.
module spiketrum_top
  import spiketrum_pkg::*;
#(
  parameter int LEN  = SEG_LEN,
  parameter int N_K  = N_KERN,
  parameter int STEP = 1,
  localparam int AW   = $clog2(LEN),
  localparam int N_CH = N_K * N_LEVEL
) (
  input  logic              clk,
  input  logic              rst_n,
  // input segment stream
  input  logic              in_valid,
  output logic              in_ready,
  input  word_t             in_data,
  // kernel dictionary load
  input  logic              kl_en,
  input  logic [M_W-1:0]    kl_m,
  input  logic [AW-1:0]     kl_j,
  input  word_t             kl_data,
  // configuration
  input  logic [CNT_W-1:0]  cfg_k,
  input  logic [DATA_W-1:0] cfg_threshold,
  // spike output
  input  logic              itp_tick,
  output logic [N_CH-1:0]   spikes,
  // observation and status
  output logic              code_valid,
  output code_t             code_out,
  output logic              seg_done,
  output logic              stop_thr,
  output logic              stop_cnt,
  output logic              itp_overflow,
  output logic              itp_pending,
  output logic [CNT_W-1:0]  n_codes,
  output logic              busy
);

  // controller
  logic seg_valid, seg_ready, seg_release;
  logic conv_start, fb_valid, fb_stop, emit, res_start, res_done, sel_resid;

  // memories
  logic          eng_en, eng_we;
  logic [AW-1:0] eng_addr;
  word_t         eng_wdata, sig_rdata;
  logic          kr_en, kr_we;
  logic [M_W-1:0] kr_m;
  logic [AW-1:0] kr_j;
  word_t         kr_rdata;

  // convolution
  logic          cv_busy, cv_sig_en, cv_kr_en, cv_res_valid, cv_done;
  logic [AW-1:0] cv_sig_addr, cv_kr_j;
  logic [M_W-1:0] cv_kr_m, cv_res_m;
  logic [TAU_W-1:0] cv_res_tau;
  word_t         cv_res_value;

  // code
  logic  cg_valid;
  code_t code;

  // residual
  logic          ke_kr_en, ke_sig_en, ke_sig_we;
  logic [M_W-1:0] ke_kr_m;
  logic [AW-1:0] ke_kr_j, ke_sig_addr;
  word_t         ke_sig_wdata;

  signal_ram_ctrl #(.LEN(LEN)) u_signal_ram (
    .clk        (clk),
    .rst_n      (rst_n),
    .in_valid   (in_valid),
    .in_ready   (in_ready),
    .in_data    (in_data),
    .seg_valid  (seg_valid),
    .seg_ready  (seg_ready),
    .seg_release(seg_release),
    .eng_en     (eng_en),
    .eng_we     (eng_we),
    .eng_addr   (eng_addr),
    .eng_wdata  (eng_wdata),
    .rdata      (sig_rdata)
  );

  // Signal RAM port: convolution reads, or residual read/write
  always_comb begin
    if (sel_resid) begin
      eng_en    = ke_sig_en;
      eng_we    = ke_sig_we;
      eng_addr  = ke_sig_addr;
      eng_wdata = ke_sig_wdata;
    end else begin
      eng_en    = cv_sig_en;
      eng_we    = 1'b0;
      eng_addr  = cv_sig_addr;
      eng_wdata = '0;
    end
  end

  // Kernel ROM port: host load while idle, else convolution or residual
  always_comb begin
    if (!busy) begin
      kr_en = kl_en;
      kr_we = 1'b1;
      kr_m  = kl_m;
      kr_j  = kl_j;
    end else if (sel_resid) begin
      kr_en = ke_kr_en;
      kr_we = 1'b0;
      kr_m  = ke_kr_m;
      kr_j  = ke_kr_j;
    end else begin
      kr_en = cv_kr_en;
      kr_we = 1'b0;
      kr_m  = cv_kr_m;
      kr_j  = cv_kr_j;
    end
  end

  kernel_rom #(.LEN(LEN), .N_K(N_K)) u_kernel_rom (
    .clk  (clk),
    .en   (kr_en),
    .we   (kr_we),
    .m    (kr_m),
    .j    (kr_j),
    .wdata(kl_data),
    .rdata(kr_rdata)
  );

  spiketrum_controller u_ctrl (
    .clk        (clk),
    .rst_n      (rst_n),
    .cfg_k      (cfg_k),
    .seg_valid  (seg_valid),
    .seg_ready  (seg_ready),
    .seg_release(seg_release),
    .conv_start (conv_start),
    .fb_valid   (fb_valid),
    .fb_stop    (fb_stop),
    .emit       (emit),
    .res_start  (res_start),
    .res_done   (res_done),
    .sel_resid  (sel_resid),
    .busy       (busy),
    .stop_thr   (stop_thr),
    .stop_cnt   (stop_cnt),
    .n_codes    (n_codes)
  );

  conv_engine #(.LEN(LEN), .N_K(N_K), .STEP(STEP)) u_conv (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (conv_start),
    .busy     (cv_busy),
    .sig_en   (cv_sig_en),
    .sig_addr (cv_sig_addr),
    .sig_rdata(sig_rdata),
    .kr_en    (cv_kr_en),
    .kr_m     (cv_kr_m),
    .kr_j     (cv_kr_j),
    .kr_rdata (kr_rdata),
    .res_valid(cv_res_valid),
    .res_m    (cv_res_m),
    .res_tau  (cv_res_tau),
    .res_value(cv_res_value),
    .done     (cv_done)
  );

  code_generator u_codegen (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (conv_start),
    .in_valid  (cv_res_valid),
    .in_last   (cv_done),
    .in_m      (cv_res_m),
    .in_tau    (cv_res_tau),
    .in_value  (cv_res_value),
    .code_valid(cg_valid),
    .code      (code)
  );

  feedback u_feedback (
    .clk       (clk),
    .rst_n     (rst_n),
    .code_valid(cg_valid),
    .s         (code.s),
    .threshold (cfg_threshold),
    .fb_valid  (fb_valid),
    .stop      (fb_stop)
  );

  kernel_elimination #(.LEN(LEN)) u_resid (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (res_start),
    .code     (code),
    .done     (res_done),
    .kr_en    (ke_kr_en),
    .kr_m     (ke_kr_m),
    .kr_j     (ke_kr_j),
    .kr_rdata (kr_rdata),
    .sig_en   (ke_sig_en),
    .sig_we   (ke_sig_we),
    .sig_addr (ke_sig_addr),
    .sig_wdata(ke_sig_wdata),
    .sig_rdata(sig_rdata)
  );

  spike_generator #(.N_K(N_K)) u_itp (
    .clk     (clk),
    .rst_n   (rst_n),
    .tick    (itp_tick),
    .emit    (emit),
    .code    (code),
    .spikes  (spikes),
    .overflow(itp_overflow),
    .pending (itp_pending)
  );

  assign code_valid = emit;
  assign code_out   = code;
  assign seg_done   = seg_release;

  assert property (@(posedge clk) disable iff (!rst_n) conv_start |-> !cv_busy)
    else $error("spiketrum_top: convolution started while busy");

endmodule
