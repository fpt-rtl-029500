// tb_mac_array: self-checking test of the multiply-accumulate array.
//
// Random FFT-domain digit polynomials (ROWS per ciphertext, NB beats each, row-major) are fed
// back to back for two batches, against random key words served from a memory with one cycle
// of read latency (as from the key buffer). The key changes after every bank_release, i.e.
// after each batch. For each ciphertext and beat the output must equal, bit for bit,
//   sum over rows j of round((x_j * bk_j) / 2^SHIFT)   (complex, per column and lane),
// with SHIFT = FRAC_IN + BK_FRAC - FRAC_OUT, wrapped to W_OUT bits. The test also checks that
// bank_release fires exactly once per batch, on the last beat, and that the output beat leaves
// 2 cycles after the last row's beat. Reduced lanes: LANES = 4, COLS = 2, ROWS = 4, NB = 2.
module tb_mac_array;
  localparam int LANES = 4, COLS = 2, ROWS = 4, NB = 2, BATCH = 2, NBATCH = 2;
  localparam int W_IN = 29, FRAC_IN = 14, BK_W = 26, BK_FRAC = 19, W_OUT = 29, FRAC_OUT = 6;
  localparam int SHIFT = FRAC_IN + BK_FRAC - FRAC_OUT, NCT = BATCH * NBATCH;
  localparam int DW = COLS * LANES * 2 * BK_W;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic signed [LANES-1:0][W_IN-1:0] in_re = '0, in_im = '0;
  logic [$clog2(ROWS*NB)-1:0] bk_rd_addr;
  logic [DW-1:0] bk_rd_data = '0;
  logic bank_release, out_valid;
  logic signed [COLS-1:0][LANES-1:0][W_OUT-1:0] out_re, out_im;
  int checks = 0, failures = 0, cyc = 0, releases = 0, bank = 0;
  longint xr [NCT][ROWS][NB][LANES], xi [NCT][ROWS][NB][LANES];
  logic [DW-1:0] bk [NBATCH][ROWS*NB];
  int t_in_last [NCT][NB], t_out [NCT][NB];

  mac_array #(.LANES(LANES), .COLS(COLS), .ROWS(ROWS), .NB(NB), .BATCH(BATCH), .W_IN(W_IN),
              .FRAC_IN(FRAC_IN), .BK_W(BK_W), .BK_FRAC(BK_FRAC), .W_OUT(W_OUT), .FRAC_OUT(FRAC_OUT)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  initial begin #100000; $display("watchdog expired"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  always @(posedge clk) begin
    bk_rd_data <= bk[bank][bk_rd_addr];
    if (bank_release) begin
      releases++;
      if (bank < NBATCH - 1) bank <= bank + 1;
    end
  end

  function automatic longint rnd_shift(longint v);
    return (v + (64'sd1 <<< (SHIFT - 1))) >>> SHIFT;
  endfunction

  function automatic longint wrap(longint v);
    longint m;
    m = v & ((64'sd1 <<< W_OUT) - 1);
    return (m >= (64'sd1 <<< (W_OUT - 1))) ? m - (64'sd1 <<< W_OUT) : m;
  endfunction

  initial begin
    for (int c = 0; c < NCT; c++)
      for (int j = 0; j < ROWS; j++)
        for (int t = 0; t < NB; t++)
          for (int q = 0; q < LANES; q++) begin
            xr[c][j][t][q] = longint'($urandom_range(1 << 21)) - (1 << 20);
            xi[c][j][t][q] = longint'($urandom_range(1 << 21)) - (1 << 20);
          end
    for (int b = 0; b < NBATCH; b++)
      for (int a = 0; a < ROWS * NB; a++)
        for (int i = 0; i < DW; i += BK_W) bk[b][a][i +: BK_W] = BK_W'(int'($urandom_range(1 << 20)) - (1 << 19));
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < NCT; c++)
      for (int j = 0; j < ROWS; j++)
        for (int t = 0; t < NB; t++) begin
          @(negedge clk);
          in_valid = 1'b1;
          for (int q = 0; q < LANES; q++) begin
            in_re[q] = W_IN'(xr[c][j][t][q]);
            in_im[q] = W_IN'(xi[c][j][t][q]);
          end
          if (j == ROWS - 1) t_in_last[c][t] = cyc;
          if (c == NCT - 1 && j == ROWS - 1 && t == NB - 1) begin
            #1 checks++;
            if (!bank_release) begin failures++; $display("no bank_release on the last beat"); end
          end
        end
    @(negedge clk);
    in_valid = 1'b0;
  end

  initial begin
    for (int c = 0; c < NCT; c++)
      for (int t = 0; t < NB; t++) begin
        @(posedge clk);
        while (!out_valid) @(posedge clk);
        t_out[c][t] = cyc;
        for (int col = 0; col < COLS; col++)
          for (int q = 0; q < LANES; q++) begin
            longint er, ei;
            er = 0; ei = 0;
            for (int j = 0; j < ROWS; j++) begin
              longint br, bi;
              br = longint'($signed(bk[c / BATCH][j*NB + t][((col*LANES + q)*2 + 0)*BK_W +: BK_W]));
              bi = longint'($signed(bk[c / BATCH][j*NB + t][((col*LANES + q)*2 + 1)*BK_W +: BK_W]));
              er += rnd_shift(xr[c][j][t][q] * br - xi[c][j][t][q] * bi);
              ei += rnd_shift(xr[c][j][t][q] * bi + xi[c][j][t][q] * br);
            end
            checks++;
            if (longint'($signed(out_re[col][q])) != wrap(er) || longint'($signed(out_im[col][q])) != wrap(ei)) begin
              failures++;
              if (failures < 6) $display("MISMATCH ct %0d beat %0d col %0d lane %0d got %0d exp %0d", c, t, col, q,
                                         $signed(out_re[col][q]), wrap(er));
            end
          end
      end
    repeat (3) @(posedge clk);
    checks++;
    if (releases != NBATCH) begin failures++; $display("bank releases %0d, expected %0d", releases, NBATCH); end
    for (int c = 0; c < NCT; c++)
      for (int t = 0; t < NB; t++) begin
        checks++;
        if (t_out[c][t] - t_in_last[c][t] != 2) begin
          failures++; $display("LATENCY ct %0d beat %0d: %0d cycles", c, t, t_out[c][t] - t_in_last[c][t]);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
