// fpt_ctrl: batch sequencer of the bootstrapping kernel.
//
// A batch is the BATCH ciphertexts at the head of the ciphertext FIFO. All of them go through
// blind-rotation iteration i before any of them starts iteration i+1, so one key coefficient
// BK_i serves the whole batch. For each iteration (NLWE of them) and each ciphertext slot the
// controller issues (K+1)*NBL consecutive accumulator beats to the CMUX, with the slot's rotation
// a_i; in the first iteration the beats come from the test-polynomial RAM (F * X^-b, requested
// at the first beat of each polynomial, delivered one cycle later), afterwards from the CMUX's
// recirculation FIFO. The issue outputs are registered, so they line up with the RAM data.
// Before a slot starts, the controller waits (a stall) until
//   - key coefficient BK_i has been loaded: bk_fill_count > index of the current iteration, and
//   - the slot's recirculated accumulator is complete in the FIFO (iterations after the first).
// After the last slot of the last iteration the batch is popped from the FIFO; if the next
// batch is already queued it starts in the next cycle, otherwise the controller goes idle.
// The batch ordering follows the paper; the handshakes and stall rules are this design's.
module fpt_ctrl #(
  parameter int NLWE  = 586,
  parameter int BATCH = 12,
  parameter int K     = 2,
  parameter int NBL   = 4,
  parameter int ROT_W = 10,
  parameter int LUT_W = 2,
  parameter int FDEPTH = 24,
  parameter int FB_W  = 8,
  localparam int CT_W = (NLWE + 1) * ROT_W + LUT_W
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // ciphertext FIFO
  input  logic [$clog2(FDEPTH+1)-1:0]   fifo_count,
  output logic [$clog2(FDEPTH)-1:0]     peek_idx,
  input  logic [CT_W-1:0]               peek_ct,
  output logic                          pop_batch,
  // key buffer and CMUX status
  input  logic [31:0]                   bk_fill_count,
  input  logic [FB_W-1:0]               fb_count,
  // test polynomial RAM request
  output logic                          lut_rd_en,
  output logic [LUT_W-1:0]              lut_rd_lut,
  output logic [$clog2(K+1)-1:0]        lut_rd_poly,
  output logic [ROT_W-1:0]              lut_rd_b,
  // CMUX issue (registered)
  output logic                          cm_valid,
  output logic                          cm_init,
  output logic [ROT_W-1:0]              cm_rot,
  output logic                          cm_last,
  output logic [$clog2(NBL)-1:0]        cm_beat,
  // statistics
  output logic [31:0]                   stall_bk_cycles,
  output logic [31:0]                   stall_fb_cycles,
  output logic [31:0]                   batches_started
);
  localparam int IW = $clog2(NLWE);
  localparam int SW = (BATCH > 1) ? $clog2(BATCH) : 1;
  localparam int PW = $clog2(K+1);
  localparam int BW = $clog2(NBL);
  localparam int SLOT_BEATS = (K + 1) * NBL;

  logic          active;
  logic [IW-1:0] iter;
  logic [SW-1:0] slot;
  logic [PW-1:0] m;
  logic [BW-1:0] t;
  logic [31:0]   g;              // global iteration index (counts key coefficients used)
  logic          starting, bk_ok, fb_ok, issue, end_slot, end_iter, end_batch;
  int            fb_avail;

  assign peek_idx  = ($clog2(FDEPTH))'(slot);
  assign starting  = (m == '0) && (t == '0);
  assign bk_ok     = bk_fill_count > g;
  assign fb_avail  = int'(fb_count) - ((cm_valid && !cm_init) ? 1 : 0);
  assign fb_ok     = (iter == '0) || (fb_avail >= SLOT_BEATS);
  assign issue     = active && (!starting || (bk_ok && fb_ok));
  assign end_slot  = (m == PW'(K)) && (t == BW'(NBL - 1));
  assign end_iter  = end_slot && (slot == SW'(BATCH - 1));
  assign end_batch = end_iter && (iter == IW'(NLWE - 1));
  assign pop_batch = issue && end_batch;

  assign lut_rd_en   = issue && (iter == '0) && (t == '0);
  assign lut_rd_lut  = peek_ct[CT_W-1 -: LUT_W];
  assign lut_rd_poly = m;
  assign lut_rd_b    = peek_ct[NLWE*ROT_W +: ROT_W];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; iter <= '0; slot <= '0; m <= '0; t <= '0; g <= '0;
      cm_valid <= 1'b0; cm_init <= 1'b0; cm_rot <= '0; cm_last <= 1'b0; cm_beat <= '0;
      stall_bk_cycles <= '0; stall_fb_cycles <= '0; batches_started <= '0;
    end else begin
      cm_valid <= issue;
      if (issue) begin
        cm_init <= (iter == '0);
        cm_rot  <= peek_ct[int'(iter)*ROT_W +: ROT_W];
        cm_last <= (iter == IW'(NLWE - 1));
        cm_beat <= t;
      end
      if (active && starting && !bk_ok) stall_bk_cycles <= stall_bk_cycles + 1;
      if (active && starting && bk_ok && !fb_ok) stall_fb_cycles <= stall_fb_cycles + 1;

      if (!active) begin
        if (int'(fifo_count) >= BATCH) begin
          active <= 1'b1;
          batches_started <= batches_started + 1;
        end
      end else if (issue) begin
        t <= (t == BW'(NBL - 1)) ? '0 : t + 1'b1;
        if (t == BW'(NBL - 1)) m <= (m == PW'(K)) ? '0 : m + 1'b1;
        if (end_slot) slot <= (slot == SW'(BATCH - 1)) ? '0 : slot + 1'b1;
        if (end_iter) begin
          g    <= g + 1;
          iter <= (iter == IW'(NLWE - 1)) ? '0 : iter + 1'b1;
        end
        if (end_batch) begin
          if (int'(fifo_count) >= 2 * BATCH) batches_started <= batches_started + 1;
          else active <= 1'b0;
        end
      end
    end
  end
endmodule
