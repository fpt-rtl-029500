// nega_fft: streaming forward negacyclic FFT of folded digit polynomials.
//
// Input: a folded polynomial a[i] + j*a[i+N/2] (i < M = N/2) of signed DIN_W-bit digits, as
// M/SW beats of SW complex points (beat t: points t*SW + q). The block collects one vector,
// twists it (point i times psi^i, psi = exp(+i*pi/N), the 2N-th root of unity), runs the
// size-M cyclic FFT (fft_core) and streams the M results out again at SW points per cycle in
// natural order. Together this evaluates the polynomial at the roots psi*w^k of X^N + 1, so
// pointwise products of two such transforms are negacyclic products. Data are FixedPoint
// W(W-FRAC, FRAC) after the twist; twiddles have TW_W bits. Latency from the last input beat
// to the first output beat: log2(M) + 4 cycles; one polynomial every M/SW cycles.
// Folding, twisting, the size-N/2 transform and the streaming width follow the paper; the
// collect-then-transform structure is this design's simplification of a streaming FFT.
module nega_fft #(
  parameter int M     = 256,
  parameter int SW    = 128,
  parameter int DIN_W = 8,
  parameter int W     = 29,
  parameter int FRAC  = 14,
  parameter int TW_W  = 25
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic signed [SW-1:0][DIN_W-1:0] in_re,
  input  logic signed [SW-1:0][DIN_W-1:0] in_im,
  output logic                          out_valid,
  output logic signed [SW-1:0][W-1:0]   out_re,
  output logic signed [SW-1:0][W-1:0]   out_im
);
  localparam int NB      = M / SW;
  localparam int BW      = (NB > 1) ? $clog2(NB) : 1;
  localparam int TW_FRAC = TW_W - 2;

  logic signed [M-1:0][DIN_W-1:0] dr, di;
  logic [BW-1:0]                  bcnt;
  logic                           full_v, tw_v, core_v;
  logic signed [M-1:0][W-1:0]     xr, xi, tr, ti, fr, fi, hr, hi;
  logic [BW-1:0]                  ocnt;
  logic                           busy;

  // collect
  always_ff @(posedge clk) begin
    if (in_valid)
      for (int q = 0; q < SW; q++) begin
        dr[int'(bcnt)*SW + q] <= in_re[q];
        di[int'(bcnt)*SW + q] <= in_im[q];
      end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bcnt <= '0; full_v <= 1'b0; tw_v <= 1'b0;
    end else begin
      full_v <= in_valid && (bcnt == BW'(NB - 1));
      tw_v   <= full_v;
      if (in_valid) bcnt <= (bcnt == BW'(NB - 1)) ? '0 : bcnt + 1'b1;
    end
  end

  // twist by psi^i
  for (genvar i = 0; i < M; i++) begin : g_twist
    assign xr[i] = W'($signed(dr[i])) <<< FRAC;
    assign xi[i] = W'($signed(di[i])) <<< FRAC;
    cmul_const #(.W(W), .TW_W(TW_W), .TW_FRAC(TW_FRAC),
                 .C(fpt_pkg::cos_fix(longint'(i), longint'(4*M), TW_FRAC)), .D(fpt_pkg::sin_fix(longint'(i), longint'(4*M), TW_FRAC)))
      u_tw (.a(xr[i]), .b(xi[i]), .x(tr[i]), .y(ti[i]));
  end
  logic signed [M-1:0][W-1:0] tqr, tqi;
  always_ff @(posedge clk) begin
    tqr <= tr;
    tqi <= ti;
  end

  fft_core #(.W(W), .TW_W(TW_W), .M(M), .INVERSE(1'b0)) u_core (
    .clk, .rst_n, .in_valid(tw_v), .in_re(tqr), .in_im(tqi),
    .out_valid(core_v), .out_re(fr), .out_im(fi));

  // serialise
  always_ff @(posedge clk) begin
    if (core_v) begin
      hr <= fr;
      hi <= fi;
    end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; ocnt <= '0;
    end else if (core_v) begin
      busy <= 1'b1; ocnt <= '0;
    end else if (busy) begin
      ocnt <= (ocnt == BW'(NB - 1)) ? '0 : ocnt + 1'b1;
      if (ocnt == BW'(NB - 1)) busy <= 1'b0;
    end
  end
  assign out_valid = busy;
  always_comb
    for (int q = 0; q < SW; q++) begin
      out_re[q] = hr[int'(ocnt)*SW + q];
      out_im[q] = hi[int'(ocnt)*SW + q];
    end
endmodule
