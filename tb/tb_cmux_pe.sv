// tb_cmux_pe: self-checking test of one CMUX processing element.
//
// The bootstrapping key is the noiseless "trivial" encryption of a key bit s: in the FFT
// domain BK = s * G, i.e. for row (m, level) and column m every point holds the gadget weight
// 2^-(BETA*(level+1)) in the key's fixed-point format. Then one CMUX computes exactly
// ACC * X^(s*a) up to the rounding of the decomposition and the FFTs. The test sends BATCH
// random accumulators with random rotations, runs ITER iterations (the later ones fed back
// through the recirculation FIFO) and compares every output coefficient with the exact
// negacyclic rotation, allowing a small rounding error. It also checks the output cycle
// spacing: one ciphertext's results leave every (K+1)*NBL cycles within a batch.
// Reduced size: N = 32, K = 1, SW_FFT = 8, BATCH = 2, so the reference stays fast. The IFFT
// gets 6 + log2(256/M) fraction bits, which keeps the per-coefficient resolution of the
// full-size FixedPoint29(23,6) format (its LSB is 2^-6/M of the torus after the 1/M scaling).
module tb_cmux_pe;
  localparam int N = 32, K = 1, L = 2, BETA = 8, SW_FFT = 8, BATCH = 2, ITER = 3;
  localparam int ACC_W = L * BETA, M = N / 2, SW_IFFT = SW_FFT / L, BEAT_COEF = 2 * SW_IFFT;
  localparam int NBL = N / BEAT_COEF, NBF = M / SW_FFT, ROWS = (K + 1) * L;
  localparam int ROT_W = $clog2(2 * N), BK_W = 26, DEPTH = BATCH * (K + 1) * NBL;
  localparam int TOL = 64;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, in_init = 1'b0, in_last = 1'b0;
  logic [BEAT_COEF-1:0][ACC_W-1:0] in_init_beat = '0;
  logic [ROT_W-1:0] in_rot = '0;
  logic [$clog2(DEPTH+1)-1:0] fb_count;
  logic [$clog2(ROWS*NBF)-1:0] bk_rd_addr;
  logic [(K+1)*SW_FFT*2*BK_W-1:0] bk_rd_data = '0;
  logic bk_release, out_valid;
  logic [BEAT_COEF-1:0][ACC_W-1:0] out_beat;

  int checks = 0, failures = 0, maxerr = 0, cyc = 0;
  logic [(K+1)*SW_FFT*2*BK_W-1:0] bkmem [ITER][ROWS*NBF];
  bit   s [ITER];
  int   rot [ITER][BATCH];
  int   acc [BATCH][K+1][N];
  int   exp_acc [BATCH][K+1][N];
  int   it_cur = 0;
  int   t_out [BATCH];

  cmux_pe #(.N(N), .K(K), .L(L), .BETA(BETA), .SW_FFT(SW_FFT), .BATCH(BATCH),
            .IFFT_FRAC(6 + $clog2(256 / M))) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  initial begin #400000; $display("watchdog expired"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  // key memory with one cycle read latency; the iteration advances on each bank release
  always @(posedge clk) begin
    bk_rd_data <= bkmem[it_cur][bk_rd_addr];
    if (bk_release && it_cur < ITER - 1) it_cur <= it_cur + 1;
  end

  // beat layout: beat t of polynomial m has coefficient t*SW_IFFT+p in lane p and
  // N/2 + t*SW_IFFT + p in lane SW_IFFT + p
  function automatic int coef_of(int t, int lane);
    return (lane < SW_IFFT) ? t * SW_IFFT + lane : M + t * SW_IFFT + lane - SW_IFFT;
  endfunction

  initial begin
    for (int it = 0; it < ITER; it++) begin
      s[it] = (it != 1);
      for (int c = 0; c < BATCH; c++) rot[it][c] = int'($urandom_range(2 * N - 1));
      for (int w = 0; w < ROWS * NBF; w++) begin
        int row, m, lev;
        row = w / NBF; m = row / L; lev = row % L;
        bkmem[it][w] = '0;
        if (s[it])
          for (int q = 0; q < SW_FFT; q++)
            bkmem[it][w][((m * SW_FFT + q) * 2) * BK_W +: BK_W] = BK_W'(1 << (19 - BETA * (lev + 1)));
      end
    end
    for (int c = 0; c < BATCH; c++)
      for (int m = 0; m <= K; m++)
        for (int j = 0; j < N; j++) begin
          acc[c][m][j] = int'($urandom_range(65535));
          exp_acc[c][m][j] = acc[c][m][j];
        end
    // reference: exact rotation by s*a for every iteration
    for (int it = 0; it < ITER; it++)
      for (int c = 0; c < BATCH; c++)
        for (int m = 0; m <= K; m++) begin
          int tmp [N];
          int r;
          r = s[it] ? rot[it][c] : 0;
          for (int j = 0; j < N; j++) begin
            int d, sg;
            d = j + r; sg = 0;
            while (d >= N) begin d -= N; sg ^= 1; end
            tmp[d] = sg ? (65536 - exp_acc[c][m][j]) & 16'hffff : exp_acc[c][m][j];
          end
          for (int j = 0; j < N; j++) exp_acc[c][m][j] = tmp[j];
        end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < ITER; it++)
      for (int c = 0; c < BATCH; c++)
        for (int m = 0; m <= K; m++)
          for (int t = 0; t < NBL; t++) begin
            @(negedge clk);
            in_valid = 1'b0;
            while (it > 0 && fb_count == 0) @(negedge clk);
            in_valid = 1'b1;
            in_init  = (it == 0);
            in_last  = (it == ITER - 1);
            in_rot   = ROT_W'(rot[it][c]);
            for (int p = 0; p < BEAT_COEF; p++) in_init_beat[p] = ACC_W'(acc[c][m][coef_of(t, p)]);
          end
    @(negedge clk);
    in_valid = 1'b0;
  end

  initial begin
    int c, m, t;
    c = 0; m = 0; t = 0;
    while (c < BATCH) begin
      @(posedge clk);
      if (out_valid) begin
        if (m == 0 && t == 0) t_out[c] = cyc;
        for (int p = 0; p < BEAT_COEF; p++) begin
          int e, g, d;
          e = exp_acc[c][m][coef_of(t, p)];
          g = int'(out_beat[p]);
          d = (g - e) & 16'hffff;
          if (d >= 32768) d = 65536 - d;
          if (d > maxerr) maxerr = d;
          checks++;
          if (d > TOL) begin
            failures++;
            if (failures < 8) $display("MISMATCH ct %0d poly %0d coef %0d got %0d exp %0d", c, m, coef_of(t, p), g, e);
          end
        end
        t++;
        if (t == NBL) begin t = 0; m++; end
        if (m == K + 1) begin m = 0; c++; end
      end
    end
    for (int i = 1; i < BATCH; i++) begin
      checks++;
      if (t_out[i] - t_out[i-1] != (K + 1) * NBL) begin
        failures++;
        $display("RATE: outputs %0d cycles apart, expected %0d", t_out[i] - t_out[i-1], (K + 1) * NBL);
      end
    end
    $display("max |error| = %0d / 65536", maxerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
