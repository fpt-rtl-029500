// tb_nega_ifft: self-checking test of the inverse negacyclic FFT and torus conversion.
//
// Random FFT-domain vectors X[k] (FRAC fractional bits) are streamed in back to back. The
// output coefficient c[i] + j*c[i+N/2] must equal psi^-i * (1/M) * sum_k X[k] * w^(-i*k),
// converted to a 16-bit torus integer (times 2^16, modulo 2^16). Lane p of output beat u holds
// c[u*SW + p], lane SW + p holds c[N/2 + u*SW + p]. A floating-point reference is used with a
// tolerance of 8 LSBs of the IFFT format (rounding in log2(M)+1 twiddle stages). Latency (log2(M) + 3 cycles from the last input beat) and the output
// rate (one vector every M/SW cycles) are checked. Reduced size: M = 32, SW = 8, and
// FRAC = 6 + log2(256/M) so one input LSB is the same fraction of an output LSB as at full
// size.
module tb_nega_ifft;
  localparam int M = 32, SW = 8, W = 29, FRAC = 6 + $clog2(256 / M), TW_W = 25, ACC_W = 16;
  localparam int NB = M / SW, NV = 4, LAT = $clog2(M) + 3;
  // one IFFT LSB is 2^(ACC_W - FRAC - log2 M) = 4 output LSBs; allow 8 IFFT LSBs of rounding
  localparam int TOL = 8 << (ACC_W - FRAC - $clog2(M));
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, out_valid;
  logic signed [SW-1:0][W-1:0] in_re = '0, in_im = '0;
  logic [2*SW-1:0][ACC_W-1:0] out_beat;
  int checks = 0, failures = 0, cyc = 0, maxerr = 0;
  int xr [NV][M], xi [NV][M];
  int t_last_in [NV], t_first_out [NV];

  nega_ifft #(.M(M), .SW(SW), .W(W), .FRAC(FRAC), .TW_W(TW_W), .ACC_W(ACC_W)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  initial begin #100000; $display("watchdog expired"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  initial begin
    for (int v = 0; v < NV; v++)
      for (int k = 0; k < M; k++) begin
        xr[v][k] = int'($urandom_range(1 << 22)) - (1 << 21);
        xi[v][k] = int'($urandom_range(1 << 22)) - (1 << 21);
      end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int v = 0; v < NV; v++)
      for (int b = 0; b < NB; b++) begin
        @(negedge clk);
        in_valid = 1'b1;
        for (int q = 0; q < SW; q++) begin
          in_re[q] = W'(xr[v][b*SW+q]);
          in_im[q] = W'(xi[v][b*SW+q]);
        end
        if (b == NB - 1) t_last_in[v] = cyc;
      end
    @(negedge clk);
    in_valid = 1'b0;
  end

  function automatic int torus_err(int got, real expv);
    real d;
    d = real'(got) - expv;
    d = d - 65536.0 * $floor(d / 65536.0 + 0.5);
    return int'(d < 0 ? -d : d);
  endfunction

  initial begin
    for (int v = 0; v < NV; v++)
      for (int u = 0; u < NB; u++) begin
        @(posedge clk);
        while (!out_valid) @(posedge clk);
        if (u == 0) t_first_out[v] = cyc;
        for (int p = 0; p < SW; p++) begin
          real sr, si, ang, cr, ci, sc;
          int i, e1, e2;
          i = u * SW + p;
          sr = 0.0; si = 0.0;
          for (int k = 0; k < M; k++) begin
            ang = -2.0 * 3.14159265358979323846 * real'(i * k % M) / real'(M);
            sr += real'(xr[v][k]) * $cos(ang) - real'(xi[v][k]) * $sin(ang);
            si += real'(xr[v][k]) * $sin(ang) + real'(xi[v][k]) * $cos(ang);
          end
          ang = -3.14159265358979323846 * real'(i) / real'(M) / 2.0;
          cr = sr * $cos(ang) - si * $sin(ang);
          ci = sr * $sin(ang) + si * $cos(ang);
          sc = (2.0 ** ACC_W) / (2.0 ** FRAC) / real'(M);
          e1 = torus_err(int'(out_beat[p]), cr * sc);
          e2 = torus_err(int'(out_beat[SW + p]), ci * sc);
          if (e1 > maxerr) maxerr = e1;
          if (e2 > maxerr) maxerr = e2;
          checks++;
          if (e1 > TOL || e2 > TOL) begin
            failures++;
            if (failures < 6) $display("MISMATCH vec %0d i %0d got %0d,%0d exp %f,%f", v, i, out_beat[p], out_beat[SW+p], cr * sc, ci * sc);
          end
        end
      end
    for (int v = 0; v < NV; v++) begin
      checks++;
      if (t_first_out[v] - t_last_in[v] != LAT) begin
        failures++; $display("LATENCY vec %0d: %0d cycles, expected %0d", v, t_first_out[v] - t_last_in[v], LAT);
      end
    end
    for (int v = 1; v < NV; v++) begin
      checks++;
      if (t_first_out[v] - t_first_out[v-1] != NB) begin
        failures++; $display("RATE vec %0d: %0d cycles apart", v, t_first_out[v] - t_first_out[v-1]);
      end
    end
    $display("max error %0d LSB", maxerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
