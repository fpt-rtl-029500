// tb_monomial_decomp: self-checking test of the bitwise rotate-subtract-decompose unit.
//
// For a random accumulator polynomial A and rotation a, the block receives A bitwise (four
// 4-bit chunk vectors, least significant first) and must emit, chunk by chunk, the signed
// base-2^8 digits of D = A * X^a - A (mod X^N + 1, mod 2^16): the low byte carries digit 1
// (weight 2^-16) as D[7:0] read as a signed byte, and the high byte carries digit 0 (weight
// 2^-8) as D[15:8] + D[7], also read as a signed byte. So every output word must equal
// {D[15:8] + D[7], D[7:0]}. Rotations include 0, N, 2N-1 and random values; polynomials
// arrive back to back at one chunk per cycle, and the output of each chunk must follow its
// input by one cycle. Reduced size: N = 32.
module tb_monomial_decomp;
  localparam int N = 32, ACC_W = 16, CHUNK_W = 4, BETA = 8, TAG_W = 6, NPOLY = 8;
  localparam int CH = ACC_W / CHUNK_W;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, out_valid;
  logic [$clog2(CH)-1:0] in_idx = '0, out_idx;
  logic [N-1:0][CHUNK_W-1:0] in_chunk = '0, out_chunk;
  logic [TAG_W-1:0] in_rot = '0;
  int checks = 0, failures = 0;
  int A [NPOLY][N], R [NPOLY];

  monomial_decomp #(.N(N), .ACC_W(ACC_W), .CHUNK_W(CHUNK_W), .BETA(BETA), .TAG_W(TAG_W)) dut (.*);

  always #5 clk = ~clk;
  initial begin #100000; $display("watchdog expired"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  initial begin
    for (int c = 0; c < NPOLY; c++) begin
      R[c] = (c == 0) ? 0 : (c == 1) ? N : (c == 2) ? 2 * N - 1 : int'($urandom_range(2 * N - 1));
      for (int j = 0; j < N; j++) A[c][j] = int'($urandom_range(65535));
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < NPOLY; c++)
      for (int k = 0; k < CH; k++) begin
        @(negedge clk);
        in_valid = 1'b1; in_idx = ($clog2(CH))'(k); in_rot = TAG_W'(R[c]);
        for (int j = 0; j < N; j++) in_chunk[j] = CHUNK_W'(A[c][j] >> (k * CHUNK_W));
      end
    @(negedge clk);
    in_valid = 1'b0;
  end

  initial begin
    int got [N];
    for (int c = 0; c < NPOLY; c++) begin
      int rotd [N];
      for (int j = 0; j < N; j++) begin
        int d, sg;
        d = j + R[c]; sg = 0;
        while (d >= N) begin d -= N; sg ^= 1; end
        rotd[d] = sg ? (65536 - A[c][j]) & 16'hffff : A[c][j];
      end
      for (int j = 0; j < N; j++) got[j] = 0;
      for (int k = 0; k < CH; k++) begin
        @(posedge clk);
        while (!out_valid) @(posedge clk);
        checks++;
        if (int'(out_idx) != k) begin failures++; $display("FRAME poly %0d chunk %0d", c, k); end
        for (int j = 0; j < N; j++) got[j] |= int'(out_chunk[j]) << (k * CHUNK_W);
      end
      for (int j = 0; j < N; j++) begin
        int dv, e;
        dv = (rotd[j] - A[c][j]) & 16'hffff;
        e = ((((dv >> 8) + ((dv >> 7) & 1)) & 8'hff) << 8) | (dv & 8'hff);
        checks++;
        if (got[j] != e) begin
          failures++;
          if (failures < 6) $display("MISMATCH poly %0d rot %0d coef %0d got %04h exp %04h", c, R[c], j, got[j], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // every output chunk follows its input chunk by one cycle
  int lat_checks = 0;
  always @(posedge clk) if (rst_n) begin
    if ($past(in_valid) !== out_valid) begin
      failures++; $display("LATENCY: out_valid %0b one cycle after in_valid %0b", out_valid, $past(in_valid));
    end
  end
endmodule
