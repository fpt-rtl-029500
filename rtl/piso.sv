// piso: double-buffered parallel-in serial-out converter between the MAC array and the IFFT.
//
// The inverse FFT can only start on a polynomial once the MAC array has finished it, and it
// runs at a lower streaming width than the forward FFT. This block takes the finished MAC
// results of one ciphertext (COLS polynomials of MP = LANES_IN*NB_IN points, arriving as NB_IN
// beats of COLS x LANES_IN points) into one of two buffers, and streams a full buffer out as
// COLS*MP/LANES_OUT beats of LANES_OUT points: polynomial 0 first, points in natural order.
// While one buffer is streamed the next ciphertext's results fill the other. out_valid is high
// while a full buffer is being streamed; a write into a buffer that is still full is an error
// (assertion). Latency: the first output beat appears the cycle after the last input beat.
// The double-buffered PISO is the paper's; the buffer organisation is this design's.
module piso #(
  parameter int COLS      = 3,
  parameter int LANES_IN  = 128,
  parameter int NB_IN     = 2,
  parameter int LANES_OUT = 64,
  parameter int W         = 29
) (
  input  logic                                        clk,
  input  logic                                        rst_n,
  input  logic                                        in_valid,
  input  logic signed [COLS-1:0][LANES_IN-1:0][W-1:0] in_re,
  input  logic signed [COLS-1:0][LANES_IN-1:0][W-1:0] in_im,
  output logic                                        out_valid,
  output logic signed [LANES_OUT-1:0][W-1:0]          out_re,
  output logic signed [LANES_OUT-1:0][W-1:0]          out_im
);
  localparam int MP     = LANES_IN * NB_IN;
  localparam int NB_OUT = MP / LANES_OUT;
  localparam int OB     = COLS * NB_OUT;
  localparam int IW     = (NB_IN > 1) ? $clog2(NB_IN) : 1;
  localparam int OW     = (OB > 1) ? $clog2(OB) : 1;

  logic signed [W-1:0] br [2][COLS][MP];
  logic signed [W-1:0] bi [2][COLS][MP];
  logic [1:0]          full;
  logic                wsel, rsel;
  logic [IW-1:0]       tin;
  logic [OW-1:0]       ocnt;
  logic [$clog2(COLS+1)-1:0] oc;
  logic [OW-1:0]       ob;

  always_ff @(posedge clk) begin
    if (in_valid)
      for (int c = 0; c < COLS; c++)
        for (int q = 0; q < LANES_IN; q++) begin
          br[wsel][c][int'(tin)*LANES_IN + q] <= in_re[c][q];
          bi[wsel][c][int'(tin)*LANES_IN + q] <= in_im[c][q];
        end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= '0; wsel <= 1'b0; rsel <= 1'b0; tin <= '0; ocnt <= '0;
    end else begin
      if (in_valid) begin
        if (tin == IW'(NB_IN - 1)) begin
          tin <= '0;
          full[wsel] <= 1'b1;
          wsel <= !wsel;
        end else begin
          tin <= tin + 1'b1;
        end
      end
      if (full[rsel]) begin
        if (ocnt == OW'(OB - 1)) begin
          ocnt <= '0;
          full[rsel] <= 1'b0;
          rsel <= !rsel;
        end else begin
          ocnt <= ocnt + 1'b1;
        end
      end
    end
  end

  assign oc        = ($clog2(COLS+1))'(int'(ocnt) / NB_OUT);
  assign ob        = OW'(int'(ocnt) % NB_OUT);
  assign out_valid = full[rsel];
  always_comb
    for (int p = 0; p < LANES_OUT; p++) begin
      out_re[p] = br[rsel][oc][int'(ob)*LANES_OUT + p];
      out_im[p] = bi[rsel][oc][int'(ob)*LANES_OUT + p];
    end

  a_no_overwrite: assert property (@(posedge clk) disable iff (!rst_n)
                                   (in_valid && tin == '0) |-> !full[wsel]);
endmodule
