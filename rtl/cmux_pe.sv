// cmux_pe: the CMUX processing element, the single processing element of the kernel.
//
// One CMUX iteration of blind rotation computes, for every ciphertext of the batch,
//   ACC <- (ACC * X^a_i - ACC) [external product] BK_i + ACC.
// The accumulator ACC (K+1 polynomials of N coefficients of ACC_W bits) travels as a stream of
// beats of BEAT_COEF coefficients, NBL = N/BEAT_COEF beats per polynomial, so one ciphertext
// takes (K+1)*NBL cycles (12 for parameter set I). The stages are directly cascaded, each at the
// same throughput:
//   coef_to_bitwise -> monomial_decomp -> bitwise_to_fold   (rotation, subtraction, digits)
//   nega_fft (SW_FFT points/cycle) -> mac_array (with BK_i) -> piso -> nega_ifft (SW_IFFT)
//   + ACC (from the bypass FIFO) -> back to the input through the recirculation FIFO.
// A beat enters with in_valid; in_init selects the externally supplied beat (F * X^-b, first
// iteration) instead of the recirculated accumulator; in_rot is the rotation a_i of the beat's
// ciphertext and in_last marks the last iteration, whose results leave on out_valid/out_beat
// instead of recirculating. fb_count tells the controller how many recirculated beats wait.
// The recirculation FIFO holds a whole batch of accumulators (BATCH*(K+1)*NBL beats); it
// plays the role of the extra pipeline registers that make the loop exactly as long as a
// batch. Latency from an input beat to its result: a fixed number of cycles set by the stages
// (about 60 for parameter set I). Everything but the two FIFOs follows the structure of the
// paper; the FIFOs are this design's way of closing the loop without a hand-counted delay.
module cmux_pe #(
  parameter int N         = 512,
  parameter int K         = 2,
  parameter int L         = 2,
  parameter int BETA      = 8,
  parameter int CHUNK_W   = 4,
  parameter int SW_FFT    = 128,
  parameter int BATCH     = 12,
  parameter int BK_W      = 26,
  parameter int BK_FRAC   = 19,
  parameter int FFT_W     = 29,
  parameter int FFT_FRAC  = 14,
  parameter int IFFT_W    = 29,
  parameter int IFFT_FRAC = 6,
  localparam int ACC_W     = L * BETA,
  localparam int M         = N / 2,
  localparam int SW_IFFT   = SW_FFT / L,
  localparam int BEAT_COEF = 2 * SW_IFFT,
  localparam int NBL       = N / BEAT_COEF,
  localparam int NBF       = M / SW_FFT,
  localparam int ROWS      = (K + 1) * L,
  localparam int DEPTH     = BATCH * (K + 1) * NBL,
  localparam int ROT_W     = $clog2(2 * N)
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic                                  in_valid,
  input  logic                                  in_init,
  input  logic [BEAT_COEF-1:0][ACC_W-1:0]       in_init_beat,
  input  logic [ROT_W-1:0]                      in_rot,
  input  logic                                  in_last,
  output logic [$clog2(DEPTH+1)-1:0]            fb_count,
  output logic [$clog2(ROWS*NBF)-1:0]           bk_rd_addr,
  input  logic [(K+1)*SW_FFT*2*BK_W-1:0]        bk_rd_data,
  output logic                                  bk_release,
  output logic                                  out_valid,
  output logic [BEAT_COEF-1:0][ACC_W-1:0]       out_beat
);
  localparam int CI = $clog2(ACC_W / CHUNK_W);

  // recirculated accumulator and input selection
  logic [BEAT_COEF-1:0][ACC_W-1:0] fb_dout, acc_in, sum;
  logic                            fb_empty, fb_full, fb_push;

  assign acc_in = in_init ? in_init_beat : fb_dout;

  // bypass of ACC around the external product, with the last-iteration flag
  logic [BEAT_COEF*ACC_W:0]        by_dout;
  logic                            by_empty, by_full, by_pop;

  sync_fifo #(.W(BEAT_COEF*ACC_W + 1), .DEPTH(2 * DEPTH)) u_bypass (
    .clk, .rst_n, .push(in_valid), .din({in_last, acc_in}), .pop(by_pop),
    .dout(by_dout), .empty(by_empty), .full(by_full), .count());

  // rotation, subtraction and decomposition
  logic                        cb_v, md_v, bf_v;
  logic [CI-1:0]               cb_idx, md_idx;
  logic [N-1:0][CHUNK_W-1:0]   cb_chunk, md_chunk;
  logic [ROT_W-1:0]            cb_rot;
  logic signed [SW_FFT-1:0][BETA-1:0] bf_re, bf_im;

  coef_to_bitwise #(.N(N), .BEAT_COEF(BEAT_COEF), .ACC_W(ACC_W), .CHUNK_W(CHUNK_W), .TAG_W(ROT_W))
    u_c2b (.clk, .rst_n, .in_valid, .in_beat(acc_in), .in_tag(in_rot),
           .out_valid(cb_v), .out_idx(cb_idx), .out_chunk(cb_chunk), .out_tag(cb_rot));

  monomial_decomp #(.N(N), .ACC_W(ACC_W), .CHUNK_W(CHUNK_W), .BETA(BETA), .TAG_W(ROT_W))
    u_md (.clk, .rst_n, .in_valid(cb_v), .in_idx(cb_idx), .in_chunk(cb_chunk), .in_rot(cb_rot),
          .out_valid(md_v), .out_idx(md_idx), .out_chunk(md_chunk));

  bitwise_to_fold #(.N(N), .ACC_W(ACC_W), .CHUNK_W(CHUNK_W), .BETA(BETA), .SW(SW_FFT))
    u_b2f (.clk, .rst_n, .in_valid(md_v), .in_idx(md_idx), .in_chunk(md_chunk),
           .out_valid(bf_v), .out_re(bf_re), .out_im(bf_im));

  // external product
  logic                                   ff_v, mac_v, ps_v, if_v;
  logic signed [SW_FFT-1:0][FFT_W-1:0]    ff_re, ff_im;
  logic signed [K:0][SW_FFT-1:0][IFFT_W-1:0] mac_re, mac_im;
  logic signed [SW_IFFT-1:0][IFFT_W-1:0]  ps_re, ps_im;
  logic [BEAT_COEF-1:0][ACC_W-1:0]        if_beat;

  nega_fft #(.M(M), .SW(SW_FFT), .DIN_W(BETA), .W(FFT_W), .FRAC(FFT_FRAC), .TW_W(FFT_W - 4))
    u_fft (.clk, .rst_n, .in_valid(bf_v), .in_re(bf_re), .in_im(bf_im),
           .out_valid(ff_v), .out_re(ff_re), .out_im(ff_im));

  mac_array #(.LANES(SW_FFT), .COLS(K+1), .ROWS(ROWS), .NB(NBF), .BATCH(BATCH),
              .W_IN(FFT_W), .FRAC_IN(FFT_FRAC), .BK_W(BK_W), .BK_FRAC(BK_FRAC),
              .W_OUT(IFFT_W), .FRAC_OUT(IFFT_FRAC))
    u_mac (.clk, .rst_n, .in_valid(ff_v), .in_re(ff_re), .in_im(ff_im),
           .bk_rd_addr, .bk_rd_data, .bank_release(bk_release),
           .out_valid(mac_v), .out_re(mac_re), .out_im(mac_im));

  piso #(.COLS(K+1), .LANES_IN(SW_FFT), .NB_IN(NBF), .LANES_OUT(SW_IFFT), .W(IFFT_W))
    u_piso (.clk, .rst_n, .in_valid(mac_v), .in_re(mac_re), .in_im(mac_im),
            .out_valid(ps_v), .out_re(ps_re), .out_im(ps_im));

  nega_ifft #(.M(M), .SW(SW_IFFT), .W(IFFT_W), .FRAC(IFFT_FRAC), .TW_W(IFFT_W - 4), .ACC_W(ACC_W))
    u_ifft (.clk, .rst_n, .in_valid(ps_v), .in_re(ps_re), .in_im(ps_im),
            .out_valid(if_v), .out_beat(if_beat));

  // + ACC, then recirculate or leave
  assign by_pop  = if_v;
  assign fb_push = if_v && !by_dout[BEAT_COEF*ACC_W];
  always_comb
    for (int p = 0; p < BEAT_COEF; p++) sum[p] = by_dout[p*ACC_W +: ACC_W] + if_beat[p];

  sync_fifo #(.W(BEAT_COEF*ACC_W), .DEPTH(DEPTH)) u_loop (
    .clk, .rst_n, .push(fb_push), .din(sum), .pop(in_valid && !in_init),
    .dout(fb_dout), .empty(fb_empty), .full(fb_full), .count(fb_count));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= if_v && by_dout[BEAT_COEF*ACC_W];
  end
  always_ff @(posedge clk) out_beat <= sum;

  a_bypass_ready: assert property (@(posedge clk) disable iff (!rst_n) if_v |-> !by_empty);
  a_bypass_room:  assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> !by_full);
  a_fb_room:      assert property (@(posedge clk) disable iff (!rst_n) fb_push |-> !fb_full);
  a_fb_ready:     assert property (@(posedge clk) disable iff (!rst_n) (in_valid && !in_init) |-> !fb_empty);
endmodule
