// fft_core: fully parallel, pipelined radix-2 FFT of M complex fixed-point points.
//
// X[k] = sum_n x[n] * w^(n*k) with w = exp(+2*pi*i/M), or w = exp(-2*pi*i/M) when INVERSE is
// set; the inverse is not scaled by 1/M. The structure is decimation in time: the inputs are
// wired in bit-reversed order (free in a parallel circuit) and log2(M) butterfly stages follow,
// each ending in a register, so the outputs come out in natural order. Every twiddle multiplier
// is a constant Gauss multiplier (cmul_const); data keep the same W-bit format with FRAC
// fractional bits in every stage and wrap on overflow, the widths being chosen so that overflow
// is negligibly rare. Latency: log2(M) + 1 cycles; a new vector can enter every cycle.
// The paper's FFTs come from a generator (radix-2^4, scaling schedule); this plain radix-2
// structure with a fixed format is this design's simplification.
module fft_core #(
  parameter int W       = 29,
  parameter int TW_W    = 25,
  parameter int M       = 256,
  parameter bit INVERSE = 1'b0
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic signed [M-1:0][W-1:0] in_re,
  input  logic signed [M-1:0][W-1:0] in_im,
  output logic                       out_valid,
  output logic signed [M-1:0][W-1:0] out_re,
  output logic signed [M-1:0][W-1:0] out_im
);
  localparam int LOG     = $clog2(M);
  localparam int TW_FRAC = TW_W - 2;

  logic signed [M-1:0][W-1:0] sr [LOG+1];
  logic signed [M-1:0][W-1:0] si [LOG+1];
  logic [LOG:0]               v;

  always_ff @(posedge clk)
    for (int n = 0; n < M; n++) begin
      sr[0][n] <= in_re[fpt_pkg::bitrev(n, LOG)];
      si[0][n] <= in_im[fpt_pkg::bitrev(n, LOG)];
    end

  for (genvar s = 0; s < LOG; s++) begin : g_stage
    localparam int H = 1 << s;
    for (genvar bf = 0; bf < M/2; bf++) begin : g_bf
      localparam int J  = bf % H;
      localparam int I0 = (bf / H) * 2 * H + J;
      localparam int I1 = I0 + H;
      localparam longint TC = fpt_pkg::cos_fix(longint'(J), longint'(2*H), TW_FRAC);
      localparam longint TS = INVERSE ? -fpt_pkg::sin_fix(longint'(J), longint'(2*H), TW_FRAC)
                                      :  fpt_pkg::sin_fix(longint'(J), longint'(2*H), TW_FRAC);
      logic signed [W-1:0] tr, ti;
      cmul_const #(.W(W), .TW_W(TW_W), .TW_FRAC(TW_FRAC), .C(TC), .D(TS)) u_mul (
        .a(sr[s][I1]), .b(si[s][I1]), .x(tr), .y(ti));
      always_ff @(posedge clk) begin
        sr[s+1][I0] <= sr[s][I0] + tr;
        si[s+1][I0] <= si[s][I0] + ti;
        sr[s+1][I1] <= sr[s][I0] - tr;
        si[s+1][I1] <= si[s][I0] - ti;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v <= '0;
    else        v <= {v[LOG-1:0], in_valid};
  end

  assign out_valid = v[LOG];
  assign out_re    = sr[LOG];
  assign out_im    = si[LOG];
endmodule
