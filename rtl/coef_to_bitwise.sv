// coef_to_bitwise: stream reordering from coefficient-wise to bitwise streaming.
//
// A negacyclic rotation is awkward on a coefficient-wise stream, because it exchanges
// coefficients that arrive in different cycles. This block collects one polynomial of N
// ACC_W-bit coefficients, delivered as N/BEAT_COEF beats of BEAT_COEF coefficients, and
// re-emits it bitwise: every cycle it presents all N coefficients at once, but only a
// CHUNK_W-bit slice of each, least significant slice first, over ACC_W/CHUNK_W cycles.
// Beat t carries coefficients t*H + p in lanes p < H and N/2 + t*H + p in lanes H + p
// (H = BEAT_COEF/2), which is the order the inverse FFT produces them in. The tag (the
// polynomial's rotation amount) given with the last beat travels with the chunks. Emission
// starts the cycle after the last beat, from a second register, so the next polynomial can be
// collected meanwhile. Latency: 1 cycle from the last beat to chunk 0.
module coef_to_bitwise #(
  parameter int N         = 512,
  parameter int BEAT_COEF = 128,
  parameter int ACC_W     = 16,
  parameter int CHUNK_W   = 4,
  parameter int TAG_W     = 10
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 in_valid,
  input  logic [BEAT_COEF-1:0][ACC_W-1:0]      in_beat,
  input  logic [TAG_W-1:0]                     in_tag,
  output logic                                 out_valid,
  output logic [$clog2(ACC_W/CHUNK_W)-1:0]     out_idx,
  output logic [N-1:0][CHUNK_W-1:0]            out_chunk,
  output logic [TAG_W-1:0]                     out_tag
);
  localparam int H      = BEAT_COEF / 2;
  localparam int NBL    = N / BEAT_COEF;
  localparam int CHUNKS = ACC_W / CHUNK_W;
  localparam int BW     = (NBL > 1) ? $clog2(NBL) : 1;
  localparam int CWI    = $clog2(CHUNKS);

  logic [N-1:0][ACC_W-1:0] col, nxt, emit;
  logic [BW-1:0]           beat;
  logic [CWI-1:0]          cidx;
  logic                    busy;

  initial begin
    assert (CHUNKS <= NBL) else $error("bitwise emission slower than collection");
    assert (ACC_W % CHUNK_W == 0) else $error("ACC_W must be a multiple of CHUNK_W");
  end

  always_comb begin
    nxt = col;
    for (int p = 0; p < H; p++) begin
      nxt[int'(beat)*H + p]       = in_beat[p];
      nxt[N/2 + int'(beat)*H + p] = in_beat[H + p];
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) col <= nxt;
    if (in_valid && beat == BW'(NBL - 1)) begin
      emit    <= nxt;
      out_tag <= in_tag;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beat <= '0;
      cidx <= '0;
      busy <= 1'b0;
    end else begin
      if (in_valid) beat <= (beat == BW'(NBL - 1)) ? '0 : beat + 1'b1;
      if (in_valid && beat == BW'(NBL - 1)) begin
        busy <= 1'b1;
        cidx <= '0;
      end else if (busy) begin
        cidx <= cidx + 1'b1;
        if (cidx == CWI'(CHUNKS - 1)) busy <= 1'b0;
      end
    end
  end

  assign out_valid = busy;
  assign out_idx   = cidx;
  always_comb
    for (int i = 0; i < N; i++) out_chunk[i] = emit[i][int'(cidx)*CHUNK_W +: CHUNK_W];
endmodule
