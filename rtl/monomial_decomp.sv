// monomial_decomp: monomial multiplication, subtraction and signed gadget decomposition on a
// bitwise-streamed polynomial.
//
// For one accumulator polynomial ACC and the ciphertext's rotation a (in [0, 2N)), this block
// computes D = ACC * X^a - ACC modulo X^N + 1 and splits every ACC_W-bit coefficient of D into
// ACC_W/BETA signed digits of BETA bits, the input of the external product. The polynomial
// arrives bitwise (see coef_to_bitwise): all N coefficients in parallel, CHUNK_W bits of each
// per cycle, least significant chunk first. The rotation is then the same barrel shift for every
// chunk. The negation of wrapped coefficients and the subtraction become one addition,
//   D = (neg ? ~R : R) + ~ACC + 1 + neg,
// whose carry (0..2) is kept per coefficient in flip-flops between chunks. The decomposition
// reinterprets each BETA-bit field of D as a signed digit and adds 1 to the next field when the
// lower digit is negative (its top bit set, or it overflowed); this carry too is kept in
// flip-flops. Output chunk c holds bits [c*CHUNK_W +: CHUNK_W] of the digit vector, so the
// lowest-weight digit comes out first. Latency: 1 cycle per chunk.
// The bitwise streaming, the barrel shifter and the carries in flip-flops follow the paper; the
// chunk width of 4 bits (which balances 4 chunks against the 4 beats of a polynomial) is this
// design's choice.
module monomial_decomp #(
  parameter int N       = 512,
  parameter int ACC_W   = 16,
  parameter int CHUNK_W = 4,
  parameter int BETA    = 8,
  parameter int TAG_W   = 10
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               in_valid,
  input  logic [$clog2(ACC_W/CHUNK_W)-1:0]   in_idx,
  input  logic [N-1:0][CHUNK_W-1:0]          in_chunk,
  input  logic [TAG_W-1:0]                   in_rot,
  output logic                               out_valid,
  output logic [$clog2(ACC_W/CHUNK_W)-1:0]   out_idx,
  output logic [N-1:0][CHUNK_W-1:0]          out_chunk
);
  logic [N-1:0][CHUNK_W-1:0] rotd;
  logic [N-1:0]              neg;
  logic [N-1:0][1:0]         sub_c;       // subtraction carry, 0..2
  logic [N-1:0]              dig_c;       // carry inside a digit
  logic [N-1:0]              lvl_c;       // carry into the next digit
  logic                      first, lvl_start, lvl_end;

  negacyclic_rotate #(.N(N), .W(CHUNK_W)) u_rot (
    .din(in_chunk), .rot(in_rot[$clog2(2*N)-1:0]), .dout(rotd), .neg(neg));

  assign first     = (in_idx == '0);
  assign lvl_start = ((int'(in_idx) * CHUNK_W) % BETA) == 0;
  assign lvl_end   = (((int'(in_idx) + 1) * CHUNK_W) % BETA) == 0;

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int i = 0; i < N; i++) begin
        logic [CHUNK_W+1:0] s;
        logic [CHUNK_W:0]   t;
        logic [CHUNK_W-1:0] xs, ys;
        logic [1:0]         cin;
        logic               dcin;
        xs  = neg[i] ? ~rotd[i] : rotd[i];
        ys  = ~in_chunk[i];
        cin = first ? (2'd1 + {1'b0, neg[i]}) : sub_c[i];
        s   = (CHUNK_W+2)'(xs) + (CHUNK_W+2)'(ys) + (CHUNK_W+2)'(cin);
        sub_c[i] <= s[CHUNK_W+1:CHUNK_W];
        dcin = lvl_start ? (first ? 1'b0 : lvl_c[i]) : dig_c[i];
        t    = (CHUNK_W+1)'(s[CHUNK_W-1:0]) + (CHUNK_W+1)'(dcin);
        out_chunk[i] <= t[CHUNK_W-1:0];
        if (lvl_end) lvl_c[i] <= t[CHUNK_W-1] | t[CHUNK_W];
        else         dig_c[i] <= t[CHUNK_W];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_idx   <= '0;
    end else begin
      out_valid <= in_valid;
      out_idx   <= in_idx;
    end
  end
endmodule
