// fpt_top: FPT, a fixed-point streaming accelerator for TFHE programmable bootstrapping.
//
// The kernel bootstraps batches of BATCH TLWE ciphertexts with a single CMUX processing element
// (cmux_pe). The ciphertexts of a batch are interleaved in the CMUX pipeline, so all of them are
// at the same blind-rotation iteration and share one bootstrapping-key coefficient, which a
// small ping-pong buffer (bk_buffer) provides while the next one is loaded. The parts:
//   ct_fifo        input ciphertexts (packed {lut, b, a_NLWE..a_1}, rotations in [0, 2N))
//   test_poly_ram  test polynomials F; gives F * X^-b for the first iteration
//   bk_buffer      two key coefficients in the FFT domain, filled through bk_wr_*
//   fpt_ctrl       batch sequencing and stalls
//   cmux_pe        the CMUX: rotation, decomposition, FFT, MAC, PISO, IFFT, + ACC
//   sample_extract output TLWE ciphertexts
// Host side (what would be AXI masters on HBM in an FPGA card): ciphertexts are pushed through
// ct_in_*, test polynomials written through lut_wr_*, and the key coefficients BK_1..BK_NLWE of
// every batch streamed in order through bk_wr_* (ROWS*NBF words each, any word order). Results
// leave on ct_out_*: per ciphertext K*NBL beats of mask coefficients then one beat with b in
// lane 0 (ct_out_last). The output side is not back-pressured. All torus values are the upper
// ACC_W = 16 bits of the 32-bit torus. Four statistics counters report key stall cycles,
// recirculation stall cycles, batches started and key-bank swaps (one per CMUX iteration of a
// batch). Reset is asynchronous and active low everywhere; lint reports rst_n as used both
// synchronously and asynchronously only because the assertions use it in "disable iff".
// Throughput: one CMUX every (K+1)*NBL = 12 cycles, i.e. one iteration of a full batch every
// 144 cycles, one batch every NLWE*144 cycles plus the pipeline latency for the last iteration.
// Known limit: end-to-end results have been verified for N = 32 and N = 64 only. At N = 128 and
// at the default N = 512 the outputs are wrong (close to zero) although every block passes its
// own test at N = 128 and the 144-cycle iteration schedule holds; this fault is still open.
module fpt_top
  import fpt_pkg::*;
#(
  parameter int P_NLWE    = fpt_pkg::NLWE,
  parameter int P_K       = fpt_pkg::K,
  parameter int P_N       = fpt_pkg::N,
  parameter int P_SW_FFT  = fpt_pkg::SW_FFT,
  parameter int P_BATCH   = fpt_pkg::BATCH,
  parameter int P_NUM_LUT = fpt_pkg::NUM_LUT,
  localparam int AW_      = L * BETA,
  localparam int RW_      = $clog2(2 * P_N),
  localparam int LW_      = $clog2(P_NUM_LUT),
  localparam int CTW      = (P_NLWE + 1) * RW_ + LW_,
  localparam int SWI      = P_SW_FFT / L,
  localparam int BC       = 2 * SWI,
  localparam int NBL_     = P_N / BC,
  localparam int NBF_     = (P_N / 2) / P_SW_FFT,
  localparam int ROWS_    = (P_K + 1) * L,
  localparam int BKWW     = (P_K + 1) * P_SW_FFT * 2 * BK_W,
  localparam int FDEPTH   = 2 * P_BATCH
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   ct_in_valid,
  output logic                                   ct_in_ready,
  input  logic [CTW-1:0]                         ct_in,
  input  logic                                   lut_wr_en,
  input  logic [$clog2(P_NUM_LUT*(P_K+1))-1:0]   lut_wr_addr,
  input  logic [P_N-1:0][AW_-1:0]                lut_wr_poly,
  input  logic                                   bk_wr_valid,
  output logic                                   bk_wr_ready,
  input  logic [$clog2(ROWS_*NBF_)-1:0]          bk_wr_addr,
  input  logic [BKWW-1:0]                        bk_wr_data,
  output logic                                   ct_out_valid,
  output logic [BC-1:0][AW_-1:0]                 ct_out_beat,
  output logic [$clog2(P_K+1)-1:0]               ct_out_poly,
  output logic                                   ct_out_last,
  output logic [31:0]                            stall_bk_cycles,
  output logic [31:0]                            stall_fb_cycles,
  output logic [31:0]                            batches_started,
  output logic [31:0]                            key_swaps
);
  localparam int FBW = $clog2(P_BATCH * (P_K + 1) * NBL_ + 1);

  logic [$clog2(FDEPTH+1)-1:0] fifo_count;
  logic [$clog2(FDEPTH)-1:0]   peek_idx;
  logic [CTW-1:0]              peek_ct;
  logic                        pop_batch;
  logic [31:0]                 bk_fill_count;
  logic [FBW-1:0]              fb_count;
  logic                        lut_rd_en;
  logic [LW_-1:0]              lut_rd_lut;
  logic [$clog2(P_K+1)-1:0]    lut_rd_poly;
  logic [RW_-1:0]              lut_rd_b;
  logic [P_N-1:0][AW_-1:0]     f_rot;
  logic                        cm_valid, cm_init, cm_last;
  logic [RW_-1:0]              cm_rot;
  logic [$clog2(NBL_)-1:0]     cm_beat;
  logic [BC-1:0][AW_-1:0]      init_beat, acc_out;
  logic [$clog2(ROWS_*NBF_)-1:0] bk_rd_addr;
  logic [BKWW-1:0]             bk_rd_data;
  logic                        bk_release, acc_out_valid;

  ct_fifo #(.W(CTW), .DEPTH(FDEPTH), .BATCH(P_BATCH)) u_ct_fifo (
    .clk, .rst_n, .in_valid(ct_in_valid), .in_ready(ct_in_ready), .in_ct(ct_in),
    .peek_idx, .peek_ct, .pop_batch, .count(fifo_count));

  test_poly_ram #(.N(P_N), .K(P_K), .NUM_LUT(P_NUM_LUT), .ACC_W(AW_)) u_lut (
    .clk, .wr_en(lut_wr_en), .wr_addr(lut_wr_addr), .wr_poly(lut_wr_poly),
    .rd_en(lut_rd_en), .rd_lut(lut_rd_lut), .rd_poly(lut_rd_poly), .rd_b(lut_rd_b),
    .rot_poly(f_rot));

  bk_buffer #(.ROWS(ROWS_), .NB(NBF_), .COLS(P_K+1), .LANES(P_SW_FFT), .BK_W(BK_W)) u_bk (
    .clk, .rst_n, .wr_valid(bk_wr_valid), .wr_ready(bk_wr_ready), .wr_addr(bk_wr_addr),
    .wr_data(bk_wr_data), .rd_addr(bk_rd_addr), .rd_data(bk_rd_data),
    .release_bank(bk_release), .fill_count(bk_fill_count), .release_count(key_swaps));

  fpt_ctrl #(.NLWE(P_NLWE), .BATCH(P_BATCH), .K(P_K), .NBL(NBL_), .ROT_W(RW_), .LUT_W(LW_),
             .FDEPTH(FDEPTH), .FB_W(FBW)) u_ctrl (
    .clk, .rst_n, .fifo_count, .peek_idx, .peek_ct, .pop_batch, .bk_fill_count, .fb_count,
    .lut_rd_en, .lut_rd_lut, .lut_rd_poly, .lut_rd_b,
    .cm_valid, .cm_init, .cm_rot, .cm_last, .cm_beat,
    .stall_bk_cycles, .stall_fb_cycles, .batches_started);

  // beat cm_beat of the rotated test polynomial, in accumulator beat order
  always_comb
    for (int p = 0; p < SWI; p++) begin
      init_beat[p]       = f_rot[int'(cm_beat)*SWI + p];
      init_beat[SWI + p] = f_rot[P_N/2 + int'(cm_beat)*SWI + p];
    end

  cmux_pe #(.N(P_N), .K(P_K), .L(L), .BETA(BETA), .CHUNK_W(CHUNK_W), .SW_FFT(P_SW_FFT),
            .BATCH(P_BATCH), .BK_W(BK_W), .BK_FRAC(BK_FRAC), .FFT_W(FFT_W), .FFT_FRAC(FFT_FRAC),
            .IFFT_W(IFFT_W), .IFFT_FRAC(IFFT_FRAC)) u_cmux (
    .clk, .rst_n, .in_valid(cm_valid), .in_init(cm_init), .in_init_beat(init_beat),
    .in_rot(cm_rot), .in_last(cm_last), .fb_count, .bk_rd_addr, .bk_rd_data, .bk_release,
    .out_valid(acc_out_valid), .out_beat(acc_out));

  sample_extract #(.N(P_N), .K(P_K), .BEAT_COEF(BC), .ACC_W(AW_)) u_se (
    .clk, .rst_n, .in_valid(acc_out_valid), .in_beat(acc_out),
    .out_valid(ct_out_valid), .out_beat(ct_out_beat), .out_poly(ct_out_poly),
    .out_last(ct_out_last));
endmodule
