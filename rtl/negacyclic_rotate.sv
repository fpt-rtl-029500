// negacyclic_rotate: multiplies a polynomial by the monomial X^rot modulo X^N + 1.
//
// A log2(N)-stage barrel shifter moves coefficient j to position j + rot; every coefficient
// that wraps past X^N is marked in neg, and the top bit of rot (rot >= N, i.e. X^N = -1)
// flips every mark. The coefficients themselves are not negated here: the caller negates the
// marked ones, which lets the same circuit rotate whole coefficients (test polynomial
// initialisation) or 4-bit chunks of them (bitwise-streamed monomial multiplication, where the
// negation needs a carry kept across chunks). Purely combinational.
module negacyclic_rotate #(
  parameter int N = 512,
  parameter int W = 16
) (
  input  logic [N-1:0][W-1:0]      din,
  input  logic [$clog2(2*N)-1:0]   rot,
  output logic [N-1:0][W-1:0]      dout,
  output logic [N-1:0]             neg
);
  localparam int S = $clog2(N);
  logic [N-1:0][W-1:0] d [S+1];
  logic [N-1:0]        f [S+1];

  assign d[0] = din;
  assign f[0] = '0;
  for (genvar s = 0; s < S; s++) begin : g_stage
    localparam int SH = 1 << s;
    for (genvar i = 0; i < N; i++) begin : g_coef
      if (i >= SH) begin : g_in
        assign d[s+1][i] = rot[s] ? d[s][i-SH] : d[s][i];
        assign f[s+1][i] = rot[s] ? f[s][i-SH] : f[s][i];
      end else begin : g_wrap
        assign d[s+1][i] = rot[s] ? d[s][i-SH+N] : d[s][i];
        assign f[s+1][i] = rot[s] ? ~f[s][i-SH+N] : f[s][i];
      end
    end
  end
  assign dout = d[S];
  assign neg  = f[S] ^ {N{rot[S]}};
endmodule
