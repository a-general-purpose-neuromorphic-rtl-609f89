// shifter: RAM-based shifting of one kernel by its time shift.
//
// Shifting 2048 words with logic would be costly, so the kernel is shifted by
// where it is written. The Shifter RAM has DEPTH = LEN + LEN/2 words (3072 x
// 34 bits = 13 kB by default) and is all zeros between uses.
//   load : kernel samples phi[j], j = 0..LEN-1, are read from the Kernel ROM
//          (rom_en/rom_j, data one cycle later) and written at address
//          tau + j, dropping those past the end. tau is the unsigned time
//          position (shift d = tau - LEN/2), so the start address is above
//          LEN/2 for a positive shift and below it for a negative one.
//   read : reading address LEN/2 + n gives phi[n - d], the shifted kernel,
//          zero where it falls outside the kernel. The window read is
//          always LEN/2 .. LEN/2 + LEN - 1 (1024..3071), whatever tau is.
//          rd_en/rd_idx = n, rd_data one cycle later.
//   clear: the words written by the load are set back to zero, so the next
//          load starts from an all-zero RAM; the kernel in the ROM is never
//          touched.
// load_done and clear_done pulse for one cycle at the end of each pass; a
// load_done follows load_start by LEN + 2 cycles, clear_done follows
// clear_start by at most LEN + 1. The fixed read window and
// the tau-dependent start address are the paper's; that the written range
// is cleared by explicit zero writes is this design's reading of "the RAM
// resets".
module shifter
  import spiketrum_pkg::*;
#(
  parameter int LEN = SEG_LEN,
  localparam int AW = $clog2(LEN),
  localparam int DEPTH = LEN + LEN / 2,
  localparam int RAW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [TAU_W-1:0] tau,
  // load from the Kernel ROM
  input  logic             load_start,
  output logic             rom_en,
  output logic [AW-1:0]    rom_j,
  input  word_t            rom_rdata,
  output logic             load_done,
  // read of the shifted kernel
  input  logic             rd_en,
  input  logic [AW-1:0]    rd_idx,
  output word_t            rd_data,
  // clear
  input  logic             clear_start,
  output logic             clear_done,
  output logic             busy
);

  localparam int HALF = LEN / 2;

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_CLEAR} state_t;
  state_t          state;
  logic [AW:0]     cnt;       // issue counter, one bit wider than j
  logic            w_valid;   // a ROM word arrives this cycle
  logic [AW-1:0]   w_j;
  logic [TAU_W:0]  base;      // tau latched at load

  logic            ram_en, ram_we;
  logic [RAW-1:0]  ram_addr;
  word_t           ram_wdata;
  logic [TAU_W+1:0] w_addr, c_addr;

  assign busy = (state != S_IDLE) || w_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      cnt        <= '0;
      w_valid    <= 1'b0;
      w_j        <= '0;
      base       <= '0;
      load_done  <= 1'b0;
      clear_done <= 1'b0;
    end else begin
      load_done  <= 1'b0;
      clear_done <= 1'b0;
      w_valid    <= (state == S_LOAD);
      w_j        <= AW'(cnt);
      unique case (state)
        S_IDLE: begin
          cnt <= '0;
          if (load_start) begin
            state <= S_LOAD;
            base  <= {1'b0, tau};
          end else if (clear_start) begin
            state <= S_CLEAR;
          end
        end
        S_LOAD: begin
          cnt <= cnt + 1'b1;
          if (cnt == (AW+1)'(LEN - 1)) state <= S_IDLE;
        end
        S_CLEAR: begin
          cnt <= cnt + 1'b1;
          if (cnt == (AW+1)'(LEN - 1) ||
              c_addr == (TAU_W+2)'(DEPTH - 1)) begin
            state      <= S_IDLE;
            clear_done <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
      // the last ROM word is written the cycle after the last issue
      if (w_valid && w_j == AW'(LEN - 1)) load_done <= 1'b1;
    end
  end

  assign rom_en = (state == S_LOAD);
  assign rom_j  = AW'(cnt);

  assign w_addr = (TAU_W+2)'(base) + (TAU_W+2)'(w_j);
  assign c_addr = (TAU_W+2)'(base) + (TAU_W+2)'(cnt);

  always_comb begin
    ram_en    = 1'b0;
    ram_we    = 1'b0;
    ram_addr  = RAW'(HALF) + RAW'(rd_idx);
    ram_wdata = rom_rdata;
    if (w_valid) begin
      ram_en   = (w_addr < (TAU_W+2)'(DEPTH));
      ram_we   = 1'b1;
      ram_addr = RAW'(w_addr);
    end else if (state == S_CLEAR) begin
      ram_en    = 1'b1;
      ram_we    = 1'b1;
      ram_addr  = RAW'(c_addr);
      ram_wdata = '0;
    end else if (rd_en) begin
      ram_en   = 1'b1;
    end
  end

  sp_ram #(.DEPTH(DEPTH), .WIDTH(DATA_W)) u_shift_ram (
    .clk  (clk),
    .en   (ram_en),
    .we   (ram_we),
    .addr (ram_addr),
    .wdata(ram_wdata),
    .rdata(rd_data)
  );

  assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> !busy)
    else $error("shifter: read during load or clear");
  assert property (@(posedge clk) disable iff (!rst_n)
                   load_start |-> (int'(tau) <= 2 * HALF))
    else $error("shifter: tau out of range");

endmodule
