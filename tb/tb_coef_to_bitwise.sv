// tb_coef_to_bitwise: self-checking test of the coefficient-to-bitwise converter.
//
// Polynomials arrive as NBL beats in the folded beat layout (lane p < H: coefficient u*H + p,
// lane H + p: coefficient N/2 + u*H + p) with a tag. After the last beat of a polynomial the
// block must emit ACC_W/CHUNK_W cycles of chunks, least significant first: out_chunk[j] is
// bits [c*CHUNK_W +: CHUNK_W] of coefficient j, with out_idx = c and the polynomial's tag.
// The test checks every chunk, the tag, and that chunk 0 is valid in the cycle right after the
// last beat is accepted (latency 1). Polynomials are sent back to back as in the processing
// element. Reduced size: N = 32 with 8 coefficients per beat, so a polynomial takes 4 beats,
// matching the 4 chunk cycles as at full size (512 coefficients, 128 per beat).
module tb_coef_to_bitwise;
  localparam int N = 32, BEAT_COEF = 8, ACC_W = 16, CHUNK_W = 4, TAG_W = 10, NPOLY = 5;
  localparam int NBL = N / BEAT_COEF, H = BEAT_COEF / 2, CH = ACC_W / CHUNK_W;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, out_valid;
  logic [BEAT_COEF-1:0][ACC_W-1:0] in_beat = '0;
  logic [TAG_W-1:0] in_tag = '0, out_tag;
  logic [$clog2(CH)-1:0] out_idx;
  logic [N-1:0][CHUNK_W-1:0] out_chunk;
  int checks = 0, failures = 0;
  int A [NPOLY][N], tags [NPOLY];

  coef_to_bitwise #(.N(N), .BEAT_COEF(BEAT_COEF), .ACC_W(ACC_W), .CHUNK_W(CHUNK_W), .TAG_W(TAG_W)) dut (.*);

  always #5 clk = ~clk;
  initial begin #100000; $display("watchdog expired"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  function automatic int coef_of(int t, int lane);
    return (lane < H) ? t * H + lane : N / 2 + t * H + lane - H;
  endfunction

  initial begin
    for (int c = 0; c < NPOLY; c++) begin
      tags[c] = int'($urandom_range(1023));
      for (int j = 0; j < N; j++) A[c][j] = int'($urandom_range(65535));
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < NPOLY; c++) begin
      for (int t = 0; t < NBL; t++) begin
        @(negedge clk);
        in_valid = 1'b1;
        in_tag = TAG_W'(tags[c]);
        for (int p = 0; p < BEAT_COEF; p++) in_beat[p] = ACC_W'(A[c][coef_of(t, p)]);
      end
      @(negedge clk);
      in_valid = 1'b0;
      checks++;
      if (!(out_valid && out_idx == '0)) begin failures++; $display("LATENCY: chunk 0 of poly %0d not valid after 1 cycle", c); end
      repeat (CH - NBL - 1) @(negedge clk);
    end
  end

  initial begin
    for (int c = 0; c < NPOLY; c++)
      for (int k = 0; k < CH; k++) begin
        @(posedge clk);
        while (!out_valid) @(posedge clk);
        checks++;
        if (int'(out_idx) != k || int'(out_tag) != tags[c]) begin failures++; $display("FRAME poly %0d chunk %0d", c, k); end
        for (int j = 0; j < N; j++) begin
          checks++;
          if (int'(out_chunk[j]) != ((A[c][j] >> (k * CHUNK_W)) & ((1 << CHUNK_W) - 1))) begin
            failures++;
            if (failures < 6) $display("MISMATCH poly %0d chunk %0d coef %0d", c, k, j);
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
