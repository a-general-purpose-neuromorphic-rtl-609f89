// kernel_elimination: the Residual Computing unit.
//
// Removes the component just found, s * phi_m(t - d), from the segment held
// in the Signal RAM, so that the next search finds the next feature:
//   1. LOAD : the shifter copies kernel m from the Kernel ROM into the
//             Shifter RAM at the start address given by tau;
//   2. SUB  : for each sample n = 0..LEN-1, read x[n] from the Signal RAM
//             and the shifted kernel sample from the shifter, scale it by s
//             in the residual multiplier, subtract it from x[n] in the
//             subtractor and write x_new[n] back to the same address;
//   3. CLEAR: the shifter zeroes the words it wrote;
// then done pulses for one cycle. The Signal RAM has a single port, so each
// sample is read, processed and written back before the next is read:
// 10 cycles per sample (1 read, 1 capture, 6 multiplier, 1 subtract,
// 1 write). A run takes about 12*LEN cycles, small next to the convolution
// search. The three sub-units and the write-back to the Signal RAM are the
// paper's; the sample-by-sample schedule is this design's.
module kernel_elimination
  import spiketrum_pkg::*;
#(
  parameter int LEN = SEG_LEN,
  localparam int AW = $clog2(LEN)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  code_t          code,
  output logic           done,
  // Kernel ROM read port
  output logic           kr_en,
  output logic [M_W-1:0] kr_m,
  output logic [AW-1:0]  kr_j,
  input  word_t          kr_rdata,
  // Signal RAM port
  output logic           sig_en,
  output logic           sig_we,
  output logic [AW-1:0]  sig_addr,
  output word_t          sig_wdata,
  input  word_t          sig_rdata
);

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_RD, S_CAP, S_WAIT, S_WR, S_CLEAR} state_t;
  state_t        state;
  logic [AW-1:0] n;
  word_t         x_q;
  code_t         code_q;

  logic  ld_start, ld_done, cl_start, cl_done, sh_busy;
  logic  sh_rd_en;
  word_t sh_rd_data;
  logic  mul_valid, mul_out_valid, sub_out_valid;
  word_t mul_y, x_new;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      n        <= '0;
      x_q      <= '0;
      code_q   <= '0;
      done     <= 1'b0;
      ld_start <= 1'b0;
      cl_start <= 1'b0;
    end else begin
      done     <= 1'b0;
      ld_start <= 1'b0;
      cl_start <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          code_q   <= code;
          ld_start <= 1'b1;
          state    <= S_LOAD;
        end
        S_LOAD: if (ld_done) begin
          n     <= '0;
          state <= S_RD;
        end
        S_RD:   state <= S_CAP;
        S_CAP: begin
          x_q   <= sig_rdata;
          state <= S_WAIT;
        end
        S_WAIT: if (sub_out_valid) state <= S_WR;
        S_WR: begin
          n <= n + 1'b1;
          if (n == AW'(LEN - 1)) begin
            cl_start <= 1'b1;
            state    <= S_CLEAR;
          end else begin
            state <= S_RD;
          end
        end
        S_CLEAR: if (cl_done) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign sh_rd_en  = (state == S_RD);
  assign mul_valid = (state == S_CAP);

  assign sig_en    = (state == S_RD) || (state == S_WR);
  assign sig_we    = (state == S_WR);
  assign sig_addr  = n;
  assign sig_wdata = x_new;

  logic [AW-1:0] rom_j;
  logic          rom_en;
  assign kr_en = rom_en;
  assign kr_m  = code_q.m;
  assign kr_j  = rom_j;

  shifter #(.LEN(LEN)) u_shifter (
    .clk        (clk),
    .rst_n      (rst_n),
    .tau        (code_q.tau),
    .load_start (ld_start),
    .rom_en     (rom_en),
    .rom_j      (rom_j),
    .rom_rdata  (kr_rdata),
    .load_done  (ld_done),
    .rd_en      (sh_rd_en),
    .rd_idx     (n),
    .rd_data    (sh_rd_data),
    .clear_start(cl_start),
    .clear_done (cl_done),
    .busy       (sh_busy)
  );

  residual_multiplier u_mul (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (mul_valid),
    .s        (code_q.s),
    .phi      (sh_rd_data),
    .out_valid(mul_out_valid),
    .y        (mul_y)
  );

  subtractor u_sub (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (mul_out_valid),
    .x        (x_q),
    .y        (mul_y),
    .out_valid(sub_out_valid),
    .x_new    (x_new)
  );

  assert property (@(posedge clk) disable iff (!rst_n) start |-> (state == S_IDLE))
    else $error("kernel_elimination: start while busy");
  assert property (@(posedge clk) disable iff (!rst_n) (state == S_RD) |-> !sh_busy)
    else $error("kernel_elimination: shifter read while it is loading or clearing");

endmodule
