// cmul_const: multiplication of a complex fixed-point value by a constant twiddle factor.
//
// (A + jB)(C + jD) is computed with three real multiplications (the Gauss/Karatsuba variant):
//   Z = C(A - B),  X = (C - D)B + Z,  Y = (C + D)A - Z,
// where C - D and C + D are constants fixed at elaboration. The twiddle has TW_W bits with
// TW_FRAC fractional bits; the product is rounded to nearest back to the input's fixed-point
// format and truncated to W bits (two's-complement wrap). Purely combinational. The three-
// multiplier form and the narrower twiddle follow the paper.
module cmul_const #(
  parameter int     W       = 29,
  parameter int     TW_W    = 25,
  parameter int     TW_FRAC = 23,
  parameter longint C       = 64'sd1 <<< 23,
  parameter longint D       = 0
) (
  input  logic signed [W-1:0] a,
  input  logic signed [W-1:0] b,
  output logic signed [W-1:0] x,
  output logic signed [W-1:0] y
);
  localparam int PW = W + TW_W + 4;
  localparam logic signed [TW_W+1:0] CC  = (TW_W+2)'(C);
  localparam logic signed [TW_W+1:0] CMD = (TW_W+2)'(C - D);
  localparam logic signed [TW_W+1:0] CPD = (TW_W+2)'(C + D);
  localparam logic signed [PW-1:0]   RND = PW'(64'sd1 <<< (TW_FRAC - 1));

  logic signed [PW-1:0] z, xf, yf;

  assign z  = PW'(CC)  * PW'(a - b);
  assign xf = PW'(CMD) * PW'(b) + z;
  assign yf = PW'(CPD) * PW'(a) - z;
  assign x  = W'((xf + RND) >>> TW_FRAC);
  assign y  = W'((yf + RND) >>> TW_FRAC);
endmodule
