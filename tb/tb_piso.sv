// tb_piso: self-checking test of the parallel-in serial-out buffer between the MAC array and
// the inverse FFT.
//
// Groups of NB_IN input beats (COLS columns of LANES_IN points each) are written back to back;
// the output must deliver, for each group, column 0 then 1 then 2, each as consecutive beats of
// LANES_OUT points in natural order. The test checks every output value and that a group of
// COLS*NB_IN*LANES_IN/LANES_OUT output beats follows each input group without gaps (the output
// rate is COLS*LANES_IN/LANES_OUT/ NB_IN... i.e. one group every COLS*NB_IN*LANES_IN/LANES_OUT
// cycles). Input groups are spaced to that output rate, as in the processing element.
// Reduced lanes: LANES_IN = 8, LANES_OUT = 4, NB_IN = 2, COLS = 3.
module tb_piso;
  localparam int COLS = 3, LANES_IN = 8, NB_IN = 2, LANES_OUT = 4, W = 29, NGRP = 4;
  localparam int MP = LANES_IN * NB_IN, NB_OUT = MP / LANES_OUT, OB = COLS * NB_OUT;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, out_valid;
  logic signed [COLS-1:0][LANES_IN-1:0][W-1:0] in_re = '0, in_im = '0;
  logic signed [LANES_OUT-1:0][W-1:0] out_re, out_im;
  int checks = 0, failures = 0, cyc = 0;
  int vr [NGRP][COLS][MP], vi [NGRP][COLS][MP];
  int t_first [NGRP];

  piso #(.COLS(COLS), .LANES_IN(LANES_IN), .NB_IN(NB_IN), .LANES_OUT(LANES_OUT), .W(W)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  initial begin #100000; $display("watchdog expired"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  initial begin
    for (int g = 0; g < NGRP; g++)
      for (int c = 0; c < COLS; c++)
        for (int i = 0; i < MP; i++) begin
          vr[g][c][i] = int'($urandom_range(1 << 20)) - (1 << 19);
          vi[g][c][i] = int'($urandom_range(1 << 20)) - (1 << 19);
        end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int g = 0; g < NGRP; g++) begin
      for (int t = 0; t < NB_IN; t++) begin
        @(negedge clk);
        in_valid = 1'b1;
        for (int c = 0; c < COLS; c++)
          for (int q = 0; q < LANES_IN; q++) begin
            in_re[c][q] = W'(vr[g][c][t*LANES_IN+q]);
            in_im[c][q] = W'(vi[g][c][t*LANES_IN+q]);
          end
      end
      @(negedge clk);
      in_valid = 1'b0;
      repeat (OB - NB_IN - 1) @(negedge clk);
    end
  end

  initial begin
    for (int g = 0; g < NGRP; g++)
      for (int b = 0; b < OB; b++) begin
        @(posedge clk);
        while (!out_valid) @(posedge clk);
        if (b == 0) t_first[g] = cyc;
        for (int p = 0; p < LANES_OUT; p++) begin
          int c, i;
          c = b / NB_OUT; i = (b % NB_OUT) * LANES_OUT + p;
          checks++;
          if ($signed(out_re[p]) != vr[g][c][i] || $signed(out_im[p]) != vi[g][c][i]) begin
            failures++;
            if (failures < 6) $display("MISMATCH group %0d col %0d point %0d", g, c, i);
          end
        end
      end
    for (int g = 1; g < NGRP; g++) begin
      checks++;
      if (t_first[g] - t_first[g-1] != OB) begin
        failures++; $display("RATE group %0d: %0d cycles apart, expected %0d", g, t_first[g] - t_first[g-1], OB);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
