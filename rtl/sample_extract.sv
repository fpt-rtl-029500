// sample_extract: turns the final accumulator of a ciphertext into the output TLWE ciphertext.
//
// After the last CMUX iteration the accumulator (A_0, ..., A_{K-1}, B) of a ciphertext arrives
// as K+1 polynomials of NBL = N/BEAT_COEF beats each, in the accumulator beat order (beat u:
// coefficients u*H + p in lanes p < H and N/2 + u*H + p in lanes H + p, H = BEAT_COEF/2).
// The output TLWE ciphertext of dimension K*N + 1 is
//   a_{m,0} = A_m[0],  a_{m,i} = -A_m[N - i] (0 < i < N),  b = B[0],
// which makes b - <a, s> equal to the constant coefficient of the decrypted accumulator.
// Each mask polynomial is collected, then sent as NBL beats of BEAT_COEF coefficients in
// natural order (out_poly = m); b follows as one beat with b in lane 0 and out_last set
// (out_poly = K). Latency: the first beat of a mask polynomial leaves the cycle after its last
// input beat. The extraction formula is standard TFHE (the paper names the step only); the
// output format is this design's choice.
module sample_extract #(
  parameter int N         = 512,
  parameter int K         = 2,
  parameter int BEAT_COEF = 128,
  parameter int ACC_W     = 16
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              in_valid,
  input  logic [BEAT_COEF-1:0][ACC_W-1:0]   in_beat,
  output logic                              out_valid,
  output logic [BEAT_COEF-1:0][ACC_W-1:0]   out_beat,
  output logic [$clog2(K+1)-1:0]            out_poly,
  output logic                              out_last
);
  localparam int H   = BEAT_COEF / 2;
  localparam int NBL = N / BEAT_COEF;
  localparam int BW  = (NBL > 1) ? $clog2(NBL) : 1;
  localparam int PW  = $clog2(K+1);

  logic [N-1:0][ACC_W-1:0] col, nxt, emit;
  logic [BW-1:0]           u, ecnt;
  logic [PW-1:0]           m, epoly;
  logic                    ebusy, bpend;
  logic [ACC_W-1:0]        bval;

  always_comb begin
    nxt = col;
    for (int p = 0; p < H; p++) begin
      nxt[int'(u)*H + p]       = in_beat[p];
      nxt[N/2 + int'(u)*H + p] = in_beat[H + p];
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) col <= nxt;
    if (in_valid && u == BW'(NBL - 1) && m != PW'(K)) begin
      emit  <= nxt;
      epoly <= m;
    end
    if (in_valid && u == '0 && m == PW'(K)) bval <= in_beat[0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      u <= '0; m <= '0; ecnt <= '0; ebusy <= 1'b0; bpend <= 1'b0;
    end else begin
      if (in_valid) begin
        if (u == BW'(NBL - 1)) begin
          u <= '0;
          m <= (m == PW'(K)) ? '0 : m + 1'b1;
        end else begin
          u <= u + 1'b1;
        end
      end
      if (in_valid && u == BW'(NBL - 1) && m != PW'(K)) begin
        ebusy <= 1'b1;
        ecnt  <= '0;
      end else if (ebusy) begin
        ecnt <= ecnt + 1'b1;
        if (ecnt == BW'(NBL - 1)) ebusy <= 1'b0;
      end
      if (in_valid && u == BW'(NBL - 1) && m == PW'(K)) bpend <= 1'b1;
      else if (!ebusy && bpend) bpend <= 1'b0;
    end
  end

  assign out_valid = ebusy || bpend;
  assign out_last  = !ebusy && bpend;
  assign out_poly  = ebusy ? epoly : PW'(K);
  always_comb begin
    for (int p = 0; p < BEAT_COEF; p++) begin
      int i;
      i = int'(ecnt) * BEAT_COEF + p;
      if (ebusy) out_beat[p] = (i == 0) ? emit[0] : -emit[N - i];
      else       out_beat[p] = (p == 0) ? bval : '0;
    end
  end
endmodule
