// nega_ifft: streaming inverse negacyclic FFT back to 16-bit torus coefficients.
//
// Input: M = N/2 FFT-domain points as M/SW beats of SW complex values in FixedPoint
// W(W-FRAC, FRAC), in torus units and not yet scaled by 1/M. The block collects one vector,
// runs the size-M inverse FFT (fft_core), untwists (point i times psi^-i) and scales by 1/M,
// giving the folded coefficients c[i] + j*c[i+N/2]. Each is converted to an ACC_W-bit torus
// integer (value * 2^ACC_W modulo 2^ACC_W; bits above the torus wrap away, rounding to nearest
// when bits are dropped) and streamed out at SW folded points per cycle: output beat u carries
// c[u*SW + p] in lane p and c[N/2 + u*SW + p] in lane SW + p. Latency from the last input beat
// to the first output beat: log2(M) + 3 cycles; one polynomial every M/SW cycles.
// The IFFT format, the streaming width and the untwist/unfold follow the paper; the collect-
// then-transform structure and the conversion rule are this design's choice.
module nega_ifft #(
  parameter int M     = 256,
  parameter int SW    = 64,
  parameter int W     = 29,
  parameter int FRAC  = 6,
  parameter int TW_W  = 25,
  parameter int ACC_W = 16
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              in_valid,
  input  logic signed [SW-1:0][W-1:0]       in_re,
  input  logic signed [SW-1:0][W-1:0]       in_im,
  output logic                              out_valid,
  output logic [2*SW-1:0][ACC_W-1:0]        out_beat
);
  localparam int NB      = M / SW;
  localparam int BW      = (NB > 1) ? $clog2(NB) : 1;
  localparam int TW_FRAC = TW_W - 2;
  localparam int SH      = FRAC + $clog2(M) - ACC_W;  // right shift from IFFT units to torus

  logic signed [M-1:0][W-1:0] dr, di, fr, fi, ur, ui;
  logic [M-1:0][ACC_W-1:0]    cr, ci, hr, hi;
  logic [BW-1:0]              bcnt, ocnt;
  logic                       full_v, core_v, busy;

  always_ff @(posedge clk) begin
    if (in_valid)
      for (int q = 0; q < SW; q++) begin
        dr[int'(bcnt)*SW + q] <= in_re[q];
        di[int'(bcnt)*SW + q] <= in_im[q];
      end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bcnt <= '0; full_v <= 1'b0;
    end else begin
      full_v <= in_valid && (bcnt == BW'(NB - 1));
      if (in_valid) bcnt <= (bcnt == BW'(NB - 1)) ? '0 : bcnt + 1'b1;
    end
  end

  fft_core #(.W(W), .TW_W(TW_W), .M(M), .INVERSE(1'b1)) u_core (
    .clk, .rst_n, .in_valid(full_v), .in_re(dr), .in_im(di),
    .out_valid(core_v), .out_re(fr), .out_im(fi));

  // untwist by psi^-i, scale and convert to ACC_W-bit torus
  for (genvar i = 0; i < M; i++) begin : g_untwist
    cmul_const #(.W(W), .TW_W(TW_W), .TW_FRAC(TW_FRAC),
                 .C(fpt_pkg::cos_fix(longint'(i), longint'(4*M), TW_FRAC)), .D(-fpt_pkg::sin_fix(longint'(i), longint'(4*M), TW_FRAC)))
      u_tw (.a(fr[i]), .b(fi[i]), .x(ur[i]), .y(ui[i]));
    if (SH > 0) begin : g_rshift
      assign cr[i] = ACC_W'(($signed(ur[i]) + W'(1 <<< (SH - 1))) >>> SH);
      assign ci[i] = ACC_W'(($signed(ui[i]) + W'(1 <<< (SH - 1))) >>> SH);
    end else begin : g_lshift
      assign cr[i] = ACC_W'(ur[i] << (-SH));
      assign ci[i] = ACC_W'(ui[i] << (-SH));
    end
  end

  always_ff @(posedge clk) begin
    if (core_v) begin
      hr <= cr;
      hi <= ci;
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
    for (int p = 0; p < SW; p++) begin
      out_beat[p]      = hr[int'(ocnt)*SW + p];
      out_beat[SW + p] = hi[int'(ocnt)*SW + p];
    end
endmodule
