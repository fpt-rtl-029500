// tb_bitwise_to_fold: self-checking test of the bitwise-to-digit-parallel converter.
//
// Four chunk vectors (least significant first) of decomposed words arrive per polynomial.
// The block must then emit L*NBF beats: beat r*NBF + b carries level L-1-r... i.e. rows are
// sent most significant level first (level 0 = bits [15:8]) and, within a level, NBF beats of
// SW folded points: out_re[q] = digit of coefficient b*SW + q and out_im[q] = digit of
// coefficient N/2 + b*SW + q, each a signed 8-bit value. The test checks every digit and
// that the first beat is valid the cycle after the last chunk is accepted.
// Reduced size: N = 32, SW = 8, so NBF = 2 and one polynomial yields 4 beats, the same
// number as chunks, as in the full-size design (N = 512, SW = 128).
module tb_bitwise_to_fold;
  localparam int N = 32, ACC_W = 16, CHUNK_W = 4, BETA = 8, SW = 8, NPOLY = 5;
  localparam int CH = ACC_W / CHUNK_W, LV = ACC_W / BETA, NBF = N / 2 / SW;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, out_valid;
  logic [$clog2(CH)-1:0] in_idx = '0;
  logic [N-1:0][CHUNK_W-1:0] in_chunk = '0;
  logic signed [SW-1:0][BETA-1:0] out_re, out_im;
  int checks = 0, failures = 0;
  int A [NPOLY][N];

  bitwise_to_fold #(.N(N), .ACC_W(ACC_W), .CHUNK_W(CHUNK_W), .BETA(BETA), .SW(SW)) dut (.*);

  always #5 clk = ~clk;
  initial begin #100000; $display("watchdog expired"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  initial begin
    for (int c = 0; c < NPOLY; c++)
      for (int j = 0; j < N; j++) A[c][j] = int'($urandom_range(65535));
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < NPOLY; c++) begin
      for (int k = 0; k < CH; k++) begin
        @(negedge clk);
        in_valid = 1'b1; in_idx = ($clog2(CH))'(k);
        for (int j = 0; j < N; j++) in_chunk[j] = CHUNK_W'(A[c][j] >> (k * CHUNK_W));
      end
      @(negedge clk);
      in_valid = 1'b0;
      checks++;
      if (!out_valid) begin failures++; $display("LATENCY: poly %0d first beat late", c); end
      repeat (LV * NBF - 1) @(negedge clk);
    end
  end

  initial begin
    for (int c = 0; c < NPOLY; c++)
      for (int r = 0; r < LV; r++)
        for (int b = 0; b < NBF; b++) begin
          int lvl;
          lvl = LV - 1 - r;
          @(posedge clk);
          while (!out_valid) @(posedge clk);
          for (int q = 0; q < SW; q++) begin
            int er, ei;
            er = (A[c][b*SW + q] >> (lvl * BETA)) & 8'hff;
            ei = (A[c][N/2 + b*SW + q] >> (lvl * BETA)) & 8'hff;
            if (er >= 128) er -= 256;
            if (ei >= 128) ei -= 256;
            checks++;
            if ($signed(out_re[q]) != er || $signed(out_im[q]) != ei) begin
              failures++;
              if (failures < 6) $display("MISMATCH poly %0d row %0d beat %0d lane %0d", c, r, b, q);
            end
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
