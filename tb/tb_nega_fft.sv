// tb_nega_fft: self-checking test of the forward negacyclic FFT.
//
// Random signed 8-bit digit pairs are streamed in as folded polynomials (several back to
// back). Each output point is compared with a floating-point evaluation of
// sum_i (re_i + j*im_i) * psi^i * w^(i*k) scaled by 2^FRAC, where psi = exp(i*pi/N) and
// w = exp(2*pi*i/M). The test also checks the latency from the last input beat to the first
// output beat (log2(M) + 4 cycles) and that one polynomial leaves every M/SW cycles.
// The block runs at reduced size here (M = 32, SW = 8) so the reference stays fast; the same
// bench also passes with M = 64, SW = 16 and M = 128, SW = 32.
module tb_nega_fft;
  localparam int M = 32, SW = 8, DIN_W = 8, W = 29, FRAC = 14, TW_W = 25;
  localparam int NB = M / SW, NPOLY = 4, LAT = $clog2(M) + 4;
  localparam real TOL = 64.0;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic signed [SW-1:0][DIN_W-1:0] in_re = '0, in_im = '0;
  logic out_valid;
  logic signed [SW-1:0][W-1:0] out_re, out_im;
  int checks = 0, failures = 0;
  int dre [NPOLY][M], dim [NPOLY][M];
  int cyc = 0, t_last_in [NPOLY], t_first_out [NPOLY];

  nega_fft #(.M(M), .SW(SW), .DIN_W(DIN_W), .W(W), .FRAC(FRAC), .TW_W(TW_W)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  initial begin #200000; $display("watchdog expired"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  initial begin
    for (int p = 0; p < NPOLY; p++)
      for (int i = 0; i < M; i++) begin
        dre[p][i] = int'($urandom_range(255)) - 128;
        dim[p][i] = int'($urandom_range(255)) - 128;
      end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int p = 0; p < NPOLY; p++)
      for (int b = 0; b < NB; b++) begin
        @(negedge clk);
        in_valid = 1'b1;
        for (int q = 0; q < SW; q++) begin
          in_re[q] = DIN_W'(dre[p][b*SW+q]);
          in_im[q] = DIN_W'(dim[p][b*SW+q]);
        end
        if (b == NB - 1) t_last_in[p] = cyc;
      end
    @(negedge clk);
    in_valid = 1'b0;
  end

  initial begin
    int p, b;
    p = 0; b = 0;
    while (p < NPOLY) begin
      @(posedge clk);
      if (out_valid) begin
        if (b == 0) t_first_out[p] = cyc;
        for (int q = 0; q < SW; q++) begin
          real er, ei, ang, gr, gi;
          int k;
          k = b * SW + q;
          er = 0.0; ei = 0.0;
          for (int i = 0; i < M; i++) begin
            ang = 3.14159265358979323846 * (real'(i) / real'(M) / 2.0 + 2.0 * real'(i * k % M) / real'(M));
            er += real'(dre[p][i]) * $cos(ang) - real'(dim[p][i]) * $sin(ang);
            ei += real'(dre[p][i]) * $sin(ang) + real'(dim[p][i]) * $cos(ang);
          end
          er *= 2.0 ** FRAC; ei *= 2.0 ** FRAC;
          gr = real'($signed(out_re[q])); gi = real'($signed(out_im[q]));
          checks++;
          if ((gr - er > TOL) || (er - gr > TOL) || (gi - ei > TOL) || (ei - gi > TOL)) begin
            failures++;
            if (failures < 6) $display("MISMATCH poly %0d k %0d got %f,%f exp %f,%f", p, k, gr, gi, er, ei);
          end
        end
        b++;
        if (b == NB) begin b = 0; p++; end
      end
    end
    for (int i = 0; i < NPOLY; i++) begin
      checks++;
      if (t_first_out[i] - t_last_in[i] != LAT) begin
        failures++;
        $display("LATENCY poly %0d: %0d cycles, expected %0d", i, t_first_out[i] - t_last_in[i], LAT);
      end
    end
    for (int i = 1; i < NPOLY; i++) begin
      checks++;
      if (t_first_out[i] - t_first_out[i-1] != NB) begin
        failures++;
        $display("RATE poly %0d: %0d cycles apart, expected %0d", i, t_first_out[i] - t_first_out[i-1], NB);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
