// bitwise_to_fold: stream reordering from bitwise back to coefficient-wise streaming, merged
// with the folding step of the negacyclic FFT.
//
// It collects the ACC_W/CHUNK_W digit chunks of one polynomial (see monomial_decomp), which
// gives ACC_W/BETA signed BETA-bit digits per coefficient. It then emits one "row" per
// decomposition level, most significant level first (the level of weight 2^-BETA, then
// 2^-2*BETA, ...). A row is the folded complex vector d[i] + j*d[i + N/2], i < N/2, sent as
// (N/2)/SW beats of SW complex points: beat t carries points t*SW .. t*SW + SW - 1. Emission
// starts the cycle after the last chunk, from a second register. Latency: 1 cycle from the last
// chunk to the first beat. Merging the reorder with folding follows the paper; the row order
// is this design's choice (the MAC array and key layout use the same order).
module bitwise_to_fold #(
  parameter int N       = 512,
  parameter int ACC_W   = 16,
  parameter int CHUNK_W = 4,
  parameter int BETA    = 8,
  parameter int SW      = 128
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               in_valid,
  input  logic [$clog2(ACC_W/CHUNK_W)-1:0]   in_idx,
  input  logic [N-1:0][CHUNK_W-1:0]          in_chunk,
  output logic                               out_valid,
  output logic signed [SW-1:0][BETA-1:0]     out_re,
  output logic signed [SW-1:0][BETA-1:0]     out_im
);
  localparam int CHUNKS = ACC_W / CHUNK_W;
  localparam int LV     = ACC_W / BETA;
  localparam int NBF    = (N / 2) / SW;
  localparam int ROWB   = LV * NBF;               // beats per polynomial
  localparam int RW     = (ROWB > 1) ? $clog2(ROWB) : 1;

  logic [N-1:0][ACC_W-1:0] col, nxt, emit;
  logic [RW-1:0]           ocnt;
  logic                    busy;
  int                      lvl, bt;

  initial assert (ROWB >= CHUNKS) else $error("fold emission must not be faster than collection");

  always_comb begin
    nxt = col;
    for (int i = 0; i < N; i++) nxt[i][int'(in_idx)*CHUNK_W +: CHUNK_W] = in_chunk[i];
  end

  always_ff @(posedge clk) begin
    if (in_valid) col <= nxt;
    if (in_valid && in_idx == ($clog2(CHUNKS))'(CHUNKS - 1)) emit <= nxt;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      ocnt <= '0;
    end else if (in_valid && in_idx == ($clog2(CHUNKS))'(CHUNKS - 1)) begin
      busy <= 1'b1;
      ocnt <= '0;
    end else if (busy) begin
      ocnt <= ocnt + 1'b1;
      if (ocnt == RW'(ROWB - 1)) busy <= 1'b0;
    end
  end

  // row r = ocnt / NBF is level LV-1-r counted from the least significant digit
  assign bt  = (NBF > 1) ? int'(ocnt) % NBF : 0;
  assign lvl = LV - 1 - int'(ocnt) / NBF;
  assign out_valid = busy;
  always_comb
    for (int q = 0; q < SW; q++) begin
      out_re[q] = emit[bt*SW + q][lvl*BETA +: BETA];
      out_im[q] = emit[N/2 + bt*SW + q][lvl*BETA +: BETA];
    end
endmodule
