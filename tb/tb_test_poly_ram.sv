// tb_test_poly_ram: self-checking test of the test-polynomial memory.
//
// Random test polynomials are written for every LUT and every output polynomial. Each read
// with a random b must return F * X^-b: coefficient j equals F[j + b] for j + b < N, the
// negated F[j + b - N] for N <= j + b < 2N, and so on modulo 2N. The read result is checked
// one cycle after rd_en (registered output). Reduced size: N = 32, K = 2, 4 LUTs.
module tb_test_poly_ram;
  localparam int N = 32, K = 2, NUM_LUT = 4, ACC_W = 16, NRD = 60;
  logic clk = 1'b0;
  logic wr_en = 1'b0, rd_en = 1'b0;
  logic [$clog2(NUM_LUT*(K+1))-1:0] wr_addr = '0;
  logic [N-1:0][ACC_W-1:0] wr_poly = '0, rot_poly;
  logic [$clog2(NUM_LUT)-1:0] rd_lut = '0;
  logic [$clog2(K+1)-1:0] rd_poly = '0;
  logic [$clog2(2*N)-1:0] rd_b = '0;
  int checks = 0, failures = 0;
  int F [NUM_LUT*(K+1)][N];

  test_poly_ram #(.N(N), .K(K), .NUM_LUT(NUM_LUT), .ACC_W(ACC_W)) dut (.*);

  always #5 clk = ~clk;
  initial begin #100000; $display("watchdog expired"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  initial begin
    for (int a = 0; a < NUM_LUT * (K + 1); a++)
      for (int j = 0; j < N; j++) F[a][j] = int'($urandom_range(65535));
    for (int a = 0; a < NUM_LUT * (K + 1); a++) begin
      @(negedge clk);
      wr_en = 1'b1; wr_addr = ($clog2(NUM_LUT*(K+1)))'(a);
      for (int j = 0; j < N; j++) wr_poly[j] = ACC_W'(F[a][j]);
    end
    @(negedge clk);
    wr_en = 1'b0;
    for (int r = 0; r < NRD; r++) begin
      int u, m, b;
      u = int'($urandom_range(NUM_LUT - 1)); m = int'($urandom_range(K)); b = int'($urandom_range(2 * N - 1));
      if (r < 3) b = r * N / 2 + (r == 2 ? N + 1 : 0);
      @(negedge clk);
      rd_en = 1'b1; rd_lut = ($clog2(NUM_LUT))'(u); rd_poly = ($clog2(K+1))'(m); rd_b = ($clog2(2*N))'(b);
      @(negedge clk);
      rd_en = 1'b0;
      for (int j = 0; j < N; j++) begin
        int idx, e;
        idx = (j + b) % (2 * N);
        e = (idx < N) ? F[u*(K+1)+m][idx] : (65536 - F[u*(K+1)+m][idx - N]) & 16'hffff;
        checks++;
        if (int'(rot_poly[j]) != e) begin
          failures++;
          if (failures < 6) $display("MISMATCH lut %0d poly %0d b %0d j %0d got %0d exp %0d", u, m, b, j, rot_poly[j], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
