// mac_array: the complex multiply-accumulate units of the FFT-unrolled external product.
//
// There are LANES x COLS MAC units (128 x 3 = 384 for parameter set I): one per FFT point lane
// and per output polynomial of the external product. Per ciphertext the forward FFT delivers
// ROWS = (k+1)*l transformed digit polynomials, each as NB beats of LANES points. Unit (col, q)
// multiplies the point in lane q by the key coefficient BK_i[row][col] at the same point and
// adds it into one of NB accumulators (one per beat position, because a polynomial's points are
// spread over NB cycles). The first row restarts the accumulators; on the last row the finished
// sums for that beat go out, all columns together, as one beat of COLS x LANES points.
// The key word for (row, beat) is read from bk_buffer at address row*NB + beat in the cycle the
// FFT beat arrives and is used one cycle later (registered read). After the last beat of the
// last ciphertext of a batch, bank_release frees the key coefficient. Products are rounded to
// the IFFT format (FRAC_OUT fractional bits) before accumulation.
// Latency: 2 cycles from the last row's beat to the output beat.
// Replacing multiply-adds by MACs, and the count of units, follow the paper; rounding each
// product before accumulation is this design's choice.
module mac_array #(
  parameter int LANES    = 128,
  parameter int COLS     = 3,
  parameter int ROWS     = 6,
  parameter int NB       = 2,
  parameter int BATCH    = 12,
  parameter int W_IN     = 29,
  parameter int FRAC_IN  = 14,
  parameter int BK_W     = 26,
  parameter int BK_FRAC  = 19,
  parameter int W_OUT    = 29,
  parameter int FRAC_OUT = 6
) (
  input  logic                                     clk,
  input  logic                                     rst_n,
  input  logic                                     in_valid,
  input  logic signed [LANES-1:0][W_IN-1:0]        in_re,
  input  logic signed [LANES-1:0][W_IN-1:0]        in_im,
  output logic [$clog2(ROWS*NB)-1:0]               bk_rd_addr,
  input  logic [COLS*LANES*2*BK_W-1:0]             bk_rd_data,
  output logic                                     bank_release,
  output logic                                     out_valid,
  output logic signed [COLS-1:0][LANES-1:0][W_OUT-1:0] out_re,
  output logic signed [COLS-1:0][LANES-1:0][W_OUT-1:0] out_im
);
  localparam int SHIFT = FRAC_IN + BK_FRAC - FRAC_OUT;
  localparam int PW    = W_IN + BK_W + 2;
  localparam int TW    = (NB > 1) ? $clog2(NB) : 1;
  localparam int RWI   = (ROWS > 1) ? $clog2(ROWS) : 1;
  localparam int CW    = (BATCH > 1) ? $clog2(BATCH) : 1;

  logic [TW-1:0]  t, t1;
  logic [RWI-1:0] j, j1;
  logic [CW-1:0]  c;
  logic           v1;
  logic signed [LANES-1:0][W_IN-1:0] xr1, xi1;
  logic signed [W_OUT-1:0] accr [NB][COLS][LANES];
  logic signed [W_OUT-1:0] acci [NB][COLS][LANES];

  assign bk_rd_addr   = ($clog2(ROWS*NB))'(int'(j) * NB + int'(t));
  assign bank_release = in_valid && t == TW'(NB - 1) && j == RWI'(ROWS - 1) && c == CW'(BATCH - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t <= '0; j <= '0; c <= '0; v1 <= 1'b0; t1 <= '0; j1 <= '0; out_valid <= 1'b0;
    end else begin
      v1 <= in_valid;
      t1 <= t;
      j1 <= j;
      out_valid <= v1 && (j1 == RWI'(ROWS - 1));
      if (in_valid) begin
        if (t == TW'(NB - 1)) begin
          t <= '0;
          if (j == RWI'(ROWS - 1)) begin
            j <= '0;
            c <= (c == CW'(BATCH - 1)) ? '0 : c + 1'b1;
          end else begin
            j <= j + 1'b1;
          end
        end else begin
          t <= t + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    xr1 <= in_re;
    xi1 <= in_im;
  end

  always_ff @(posedge clk) begin
    if (v1) begin
      for (int col = 0; col < COLS; col++)
        for (int q = 0; q < LANES; q++) begin
          logic signed [BK_W-1:0]  br, bi;
          logic signed [PW-1:0]    pr, pi;
          logic signed [W_OUT-1:0] sr, si;
          br = bk_rd_data[((col*LANES + q)*2 + 0)*BK_W +: BK_W];
          bi = bk_rd_data[((col*LANES + q)*2 + 1)*BK_W +: BK_W];
          pr = PW'($signed(xr1[q])) * PW'(br) - PW'($signed(xi1[q])) * PW'(bi);
          pi = PW'($signed(xr1[q])) * PW'(bi) + PW'($signed(xi1[q])) * PW'(br);
          pr = (pr + (PW'(1) <<< (SHIFT - 1))) >>> SHIFT;
          pi = (pi + (PW'(1) <<< (SHIFT - 1))) >>> SHIFT;
          sr = ((j1 == '0) ? '0 : accr[t1][col][q]) + pr[W_OUT-1:0];
          si = ((j1 == '0) ? '0 : acci[t1][col][q]) + pi[W_OUT-1:0];
          accr[t1][col][q] <= sr;
          acci[t1][col][q] <= si;
          out_re[col][q]   <= sr;
          out_im[col][q]   <= si;
        end
    end
  end
endmodule
