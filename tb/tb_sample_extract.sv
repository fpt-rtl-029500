// tb_sample_extract: self-checking test of SampleExtract at coefficient 0.
//
// Random accumulators (K+1 polynomials, each as NBL beats in the folded beat layout) are fed
// back to back. For every ciphertext the output must be the K mask polynomials
// a_m[0] = A_m[0], a_m[i] = -A_m[N-i], sent in natural order (BEAT_COEF coefficients per beat)
// and tagged with out_poly = m,
// followed by one beat holding b = B[0] in lane 0 with out_poly = K and out_last set.
// Reduced size: N = 32, K = 2, 16 coefficients per beat.
module tb_sample_extract;
  localparam int N = 32, K = 2, BEAT_COEF = 16, ACC_W = 16, NCT = 3;
  localparam int NBL = N / BEAT_COEF, H = BEAT_COEF / 2;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic [BEAT_COEF-1:0][ACC_W-1:0] in_beat = '0, out_beat;
  logic out_valid, out_last;
  logic [$clog2(K+1)-1:0] out_poly;
  int checks = 0, failures = 0;
  int A [NCT][K+1][N];

  sample_extract #(.N(N), .K(K), .BEAT_COEF(BEAT_COEF), .ACC_W(ACC_W)) dut (.*);

  always #5 clk = ~clk;
  initial begin #100000; $display("watchdog expired"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  function automatic int coef_of(int t, int lane);
    return (lane < H) ? t * H + lane : N / 2 + t * H + lane - H;
  endfunction

  initial begin
    for (int c = 0; c < NCT; c++)
      for (int m = 0; m <= K; m++)
        for (int j = 0; j < N; j++) A[c][m][j] = int'($urandom_range(65535));
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < NCT; c++)
      for (int m = 0; m <= K; m++)
        for (int t = 0; t < NBL; t++) begin
          @(negedge clk);
          in_valid = 1'b1;
          for (int p = 0; p < BEAT_COEF; p++) in_beat[p] = ACC_W'(A[c][m][coef_of(t, p)]);
        end
    @(negedge clk);
    in_valid = 1'b0;
  end

  initial begin
    for (int c = 0; c < NCT; c++) begin
      for (int m = 0; m < K; m++)
        for (int t = 0; t < NBL; t++) begin
          @(posedge clk);
          while (!out_valid) @(posedge clk);
          checks++;
          if (out_poly != m || out_last) begin failures++; $display("FRAME ct %0d poly %0d", c, m); end
          for (int p = 0; p < BEAT_COEF; p++) begin
            int i, e;
            i = t * BEAT_COEF + p;
            e = (i == 0) ? A[c][m][0] : (65536 - A[c][m][N - i]) & 16'hffff;
            checks++;
            if (int'(out_beat[p]) != e) begin
              failures++;
              if (failures < 6) $display("MISMATCH ct %0d poly %0d i %0d got %0d exp %0d", c, m, i, out_beat[p], e);
            end
          end
        end
      @(posedge clk);
      while (!out_valid) @(posedge clk);
      checks++;
      if (out_poly != K || !out_last || int'(out_beat[0]) != A[c][K][0]) begin
        failures++; $display("B BEAT ct %0d got %0d exp %0d", c, out_beat[0], A[c][K][0]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
