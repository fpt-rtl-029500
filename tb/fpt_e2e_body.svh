// Body of the end-to-end bootstrapping test, included by tb_fpt_top (reduced sizes) and
// other top-level tests. The including module defines T_NLWE, T_K, T_N, T_SW, T_B,
// T_NLUT, T_NBATCH, T_TOL, T_CHECK_RATE, T_EXPECT_FB_STALL and instantiates fpt_top as u_dut,
// connected to the signals declared here.
//
// Test idea: the bootstrapping key is a noiseless ("trivial") encryption of a random secret s,
// BK_i = s_i * G with G the gadget matrix, which in the FFT domain is the constant 2^-(8(lev+1))
// at every point of block (row = m*L + lev, col = m). Then every CMUX computes
// ACC <- (ACC X^a_i - ACC) s_i + ACC exactly up to FFT rounding, and the whole bootstrap must
// return SampleExtract(F * X^(-b + sum a_i s_i)). The expected values are computed here by plain
// negacyclic rotation, independently of the FFT datapath, and compared with a tolerance.

  localparam int ACC_W = 16;
  localparam int L_    = 2;
  localparam int BETA_ = 8;
  localparam int RW    = $clog2(2 * T_N);
  localparam int LW    = $clog2(T_NLUT);
  localparam int CTW   = (T_NLWE + 1) * RW + LW;
  localparam int SWI   = T_SW / L_;
  localparam int BC    = 2 * SWI;
  localparam int NBL   = T_N / BC;
  localparam int NBF   = (T_N / 2) / T_SW;
  localparam int ROWS  = (T_K + 1) * L_;
  localparam int BKWW  = (T_K + 1) * T_SW * 2 * 26;
  localparam int NCT   = T_B * T_NBATCH;
  localparam int CPB   = T_NLWE * T_B * (T_K + 1) * NBL;   // cycles per batch at full rate

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  logic                               ct_in_valid = 1'b0, ct_in_ready;
  logic [CTW-1:0]                     ct_in = '0;
  logic                               lut_wr_en = 1'b0;
  logic [$clog2(T_NLUT*(T_K+1))-1:0]  lut_wr_addr = '0;
  logic [T_N-1:0][ACC_W-1:0]          lut_wr_poly = '0;
  logic                               bk_wr_valid = 1'b0, bk_wr_ready;
  logic [$clog2(ROWS*NBF)-1:0]        bk_wr_addr = '0;
  logic [BKWW-1:0]                    bk_wr_data = '0;
  logic                               ct_out_valid, ct_out_last;
  logic [BC-1:0][ACC_W-1:0]           ct_out_beat;
  logic [$clog2(T_K+1)-1:0]           ct_out_poly;
  logic [31:0]                        stall_bk_cycles, stall_fb_cycles, batches_started, key_swaps;

  int checks = 0, failures = 0;
  bit s [T_NLWE];
  int ca [NCT][T_NLWE];
  int cb [NCT];
  int cl [NCT];
  logic [ACC_W-1:0] F [T_NLUT][T_K+1][T_N];
  int exp_a [NCT][T_K][T_N];
  int exp_b [NCT];
  int cyc = 0;
  int max_err = 0;
  int wraps = 0;
  int swaps_seen = 0;
  int lut_used [T_NLUT];
  longint t_done [T_NBATCH];

  always @(posedge clk) cyc <= cyc + 1;

  // watchdog
  initial begin
    #(longint'(10) * (longint'(T_NBATCH + 2) * CPB * 3 + 20000));
    failures++;
    $display("watchdog expired at cycle %0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int wrap16(int v);
    return ((v % 65536) + 65536) % 65536;
  endfunction

  // expected results
  task automatic compute_expected();
    for (int c = 0; c < NCT; c++) begin
      int r;
      int acc [T_K+1][T_N];
      r = (2 * T_N - cb[c]) % (2 * T_N);
      for (int i = 0; i < T_NLWE; i++) if (s[i]) r = (r + ca[c][i]) % (2 * T_N);
      if (r % T_N != 0) wraps++;
      for (int m = 0; m <= T_K; m++)
        for (int j = 0; j < T_N; j++) begin
          int d, v;
          d = j + r;               // X^j * X^r
          v = int'(F[cl[c]][m][j]);
          if ((d / T_N) % 2 == 1) v = -v;
          acc[m][d % T_N] = wrap16(v);
        end
      for (int m = 0; m < T_K; m++)
        for (int i = 0; i < T_N; i++)
          exp_a[c][m][i] = (i == 0) ? acc[m][0] : wrap16(-acc[m][T_N - i]);
      exp_b[c] = acc[T_K][0];
    end
  endtask

  function automatic void check_val(int got, int exp, string what);
    int e;
    e = got - exp;
    if (e > 32767) e -= 65536;
    if (e < -32768) e += 65536;
    if (e < 0) e = -e;
    if (e > max_err) max_err = e;
    checks++;
    if (e > T_TOL) begin
      failures++;
      if (failures < 10) $display("MISMATCH %s got %0d exp %0d", what, got, exp);
    end
  endfunction

  // stimulus
  initial begin
    void'($urandom(12345));
    for (int i = 0; i < T_NLWE; i++) s[i] = 1'($urandom);
    for (int c = 0; c < NCT; c++) begin
      for (int i = 0; i < T_NLWE; i++) ca[c][i] = int'($urandom % (2 * T_N));
      cb[c] = int'($urandom % (2 * T_N));
      cl[c] = c % T_NLUT;
      lut_used[cl[c]]++;
    end
    for (int u = 0; u < T_NLUT; u++)
      for (int m = 0; m <= T_K; m++)
        for (int j = 0; j < T_N; j++) F[u][m][j] = ACC_W'($urandom);
    compute_expected();
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int u = 0; u < T_NLUT; u++)
      for (int m = 0; m <= T_K; m++) begin
        lut_wr_en   <= 1'b1;
        lut_wr_addr <= ($clog2(T_NLUT*(T_K+1)))'(u * (T_K + 1) + m);
        for (int j = 0; j < T_N; j++) lut_wr_poly[j] <= F[u][m][j];
        @(posedge clk);
      end
    lut_wr_en <= 1'b0;
    for (int c = 0; c < NCT; c++) begin
      logic [CTW-1:0] w;
      w = '0;
      for (int i = 0; i < T_NLWE; i++) w[i*RW +: RW] = RW'(ca[c][i]);
      w[T_NLWE*RW +: RW] = RW'(cb[c]);
      w[CTW-1 -: LW]     = LW'(cl[c]);
      @(negedge clk);
      ct_in       = w;
      ct_in_valid = 1'b1;
      while (!ct_in_ready) @(negedge clk);
      @(posedge clk);
    end
    @(negedge clk);
    ct_in_valid = 1'b0;
  end

  // key feeder: BK_1..BK_n for every batch; starts late and pauses once to provoke key stalls
  initial begin
    @(posedge rst_n);
    repeat (200) @(posedge clk);
    for (int bt = 0; bt < T_NBATCH; bt++)
      for (int i = 0; i < T_NLWE; i++) begin
        if (bt == 0 && i == 1) repeat (CPB / T_NLWE + 50) @(posedge clk);
        for (int w = 0; w < ROWS * NBF; w++) begin
          logic [BKWW-1:0] d;
          int row, m, lev;
          row = w / NBF;
          m   = row / L_;
          lev = row % L_;
          d = '0;
          if (s[i])
            for (int q = 0; q < T_SW; q++)
              d[((m * T_SW + q) * 2) * 26 +: 26] = 26'(1 << (19 - BETA_ * (lev + 1)));
          @(negedge clk);
          bk_wr_addr  = ($clog2(ROWS*NBF))'(w);
          bk_wr_data  = d;
          bk_wr_valid = 1'b1;
          while (!bk_wr_ready) @(negedge clk);
          @(posedge clk);
        end
        @(negedge clk);
        bk_wr_valid = 1'b0;
      end
  end

  always @(posedge clk) if (u_dut.bk_release) swaps_seen++;

  // iteration rate: once keys arrive in time, one batch iteration (one key bank) every
  // BATCH*(K+1)*NBL cycles, i.e. one CMUX every (K+1)*NBL cycles
  localparam int CPI = T_B * (T_K + 1) * NBL;
  longint rel_prev = 0;
  int     rel_at_rate = 0;
  always @(posedge clk) if (u_dut.bk_release) begin
    if (rel_prev > 0 && longint'(cyc) - rel_prev == longint'(CPI)) rel_at_rate++;
    rel_prev = longint'(cyc);
  end
  always @(posedge clk) if (cyc > 0 && cyc % 50000 == 0) $display("cycle %0d, key swaps %0d", cyc, swaps_seen);

  // output checker
  initial begin
    int c, beat;
    c = 0; beat = 0;
    while (c < NCT) begin
      @(posedge clk);
      if (ct_out_valid) begin
        if (ct_out_last) begin
          check_val(int'(ct_out_beat[0]), exp_b[c], "b");
          checks++;
          if (int'(ct_out_poly) != T_K) failures++;
          if (beat != T_K * NBL) begin
            failures++;
            $display("ciphertext %0d: %0d mask beats, expected %0d", c, beat, T_K * NBL);
          end
          if ((c + 1) % T_B == 0) t_done[c / T_B] = cyc;
          c++;
          beat = 0;
        end else begin
          int m, u;
          m = beat / NBL;
          u = beat % NBL;
          checks++;
          if (int'(ct_out_poly) != m) failures++;
          for (int p = 0; p < BC; p++)
            check_val(int'(ct_out_beat[p]), exp_a[c][m][u * BC + p], "a");
          beat++;
        end
      end
    end
    // mechanisms
    checks++;
    if (stall_bk_cycles == 0) begin failures++; $display("no key stall happened"); end
    checks++;
    if (T_EXPECT_FB_STALL && stall_fb_cycles == 0) begin failures++; $display("no recirculation stall happened"); end
    checks++;
    checks++;
    if (key_swaps != 32'(T_NBATCH * T_NLWE)) begin
      failures++; $display("key swap counter %0d, expected %0d", key_swaps, T_NBATCH * T_NLWE);
    end
    if (swaps_seen != T_NBATCH * T_NLWE) begin
      failures++; $display("key bank swaps %0d, expected %0d", swaps_seen, T_NBATCH * T_NLWE);
    end
    checks++;
    if (batches_started != T_NBATCH) begin failures++; $display("batches %0d", batches_started); end
    checks++;
    if (wraps == 0) begin failures++; $display("no negacyclic wrap exercised"); end
    for (int u = 0; u < T_NLUT && u < NCT; u++) begin
      checks++;
      if (lut_used[u] == 0) failures++;
    end
    if (T_CHECK_RATE) begin
      // most iterations run at full rate (the first ones wait for the late key stream)
      checks++;
      if (rel_at_rate < T_NLWE / 2) begin
        failures++;
        $display("only %0d of %0d iterations ran %0d cycles apart", rel_at_rate, T_NBATCH * T_NLWE, CPI);
      end
    end
    if (T_CHECK_RATE && T_NBATCH > 1) begin
      // the second batch follows the first without a bubble: one CMUX every (K+1)*NBL cycles
      checks++;
      if (t_done[1] - t_done[0] != longint'(CPB)) begin
        failures++;
        $display("batch period %0d cycles, expected %0d", t_done[1] - t_done[0], CPB);
      end
    end
    $display("%0d iterations at the full rate of %0d cycles", rel_at_rate, CPI);
    $display("max |error| = %0d / 65536, key stalls %0d cycles, recirculation stalls %0d cycles, key swaps %0d",
             max_err, stall_bk_cycles, stall_fb_cycles, swaps_seen);
    if (T_NBATCH > 1) $display("batch period %0d cycles", t_done[1] - t_done[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
