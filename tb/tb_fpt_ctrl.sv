// tb_fpt_ctrl: self-checking test of the batch sequencer.
//
// The controller runs against behavioural models of its surroundings: a ciphertext FIFO (the
// first batch is queued at the start, the second only some time after the first is popped,
// so the controller must go idle and restart), a key buffer whose fill count grows slowly
// (forcing key stalls), and a CMUX loop that returns each non-final beat to the
// recirculation FIFO LOOP cycles after issue (longer than one iteration of the batch, forcing
// recirculation stalls). Every issued beat is compared with the expected order
// (batch, iteration, slot, polynomial, beat) and its flags and rotation a_i. The test checks
// the stall rules (no slot starts before its key is loaded or before its accumulator has
// returned; the model's FIFO never underflows), that a slot's (K+1)*NBL beats are issued in
// consecutive cycles, the test-polynomial reads, the batch pops and the statistics counters.
module tb_fpt_ctrl;
  localparam int NLWE = 4, BATCH = 3, K = 1, NBL = 2, ROT_W = 6, LUT_W = 1, FDEPTH = 6, FB_W = 5;
  localparam int CT_W = (NLWE + 1) * ROT_W + LUT_W, NBATCH = 2, NCT = NBATCH * BATCH;
  localparam int SLOT_BEATS = (K + 1) * NBL, LOOP = 20, KEY_PERIOD = 15;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [$clog2(FDEPTH+1)-1:0] fifo_count = '0;
  logic [$clog2(FDEPTH)-1:0] peek_idx;
  logic [CT_W-1:0] peek_ct;
  logic pop_batch;
  logic [31:0] bk_fill_count = '0;
  logic [FB_W-1:0] fb_count = '0;
  logic lut_rd_en;
  logic [LUT_W-1:0] lut_rd_lut;
  logic [$clog2(K+1)-1:0] lut_rd_poly;
  logic [ROT_W-1:0] lut_rd_b;
  logic cm_valid, cm_init, cm_last;
  logic [ROT_W-1:0] cm_rot;
  logic [$clog2(NBL)-1:0] cm_beat;
  logic [31:0] stall_bk_cycles, stall_fb_cycles, batches_started;

  int checks = 0, failures = 0, cyc = 0;
  logic [CT_W-1:0] cts [NCT];
  int head = 0, pops = 0, lut_reads = 0, beats = 0, fill_prev = 0;
  int slot_start_cyc = 0;
  bit loop_line [LOOP];

  fpt_ctrl #(.NLWE(NLWE), .BATCH(BATCH), .K(K), .NBL(NBL), .ROT_W(ROT_W), .LUT_W(LUT_W),
             .FDEPTH(FDEPTH), .FB_W(FB_W)) dut (.*);

  always #5 clk = ~clk;
  initial begin #200000; $display("watchdog expired"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL cycle %0d: %s", cyc, what); end
  endtask

  assign peek_ct = cts[(head + int'(peek_idx)) % NCT];

  // environment models
  always @(posedge clk) begin
    cyc <= cyc + 1;
    fill_prev <= int'(bk_fill_count);
    if (rst_n && cyc % KEY_PERIOD == 0 && bk_fill_count < 32'(NBATCH * NLWE)) bk_fill_count <= bk_fill_count + 1;
    for (int i = LOOP - 1; i > 0; i--) loop_line[i] <= loop_line[i-1];
    loop_line[0] <= cm_valid && !cm_last;
    fb_count <= fb_count + FB_W'(loop_line[LOOP-1]) - FB_W'(cm_valid && !cm_init);
    if (cm_valid && !cm_init) check(fb_count > 0, "CMUX read an empty recirculation FIFO");
    if (pop_batch) begin
      pops <= pops + 1;
      head <= head + BATCH;
      fifo_count <= fifo_count - ($clog2(FDEPTH+1))'(BATCH);
    end
  end

  initial begin
    for (int c = 0; c < NCT; c++) for (int b = 0; b < CT_W; b += 16) cts[c][b +: 16] = 16'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (5) @(posedge clk);
    fifo_count <= ($clog2(FDEPTH+1))'(BATCH);
    wait (pops == 1);
    repeat (40) @(posedge clk);
    check(batches_started == 1, "controller idle while no second batch is queued");
    fifo_count <= fifo_count + ($clog2(FDEPTH+1))'(BATCH);
  end

  // expected issue order
  initial begin
    @(posedge rst_n);
    for (int bt = 0; bt < NBATCH; bt++)
      for (int i = 0; i < NLWE; i++)
        for (int s = 0; s < BATCH; s++)
          for (int m = 0; m <= K; m++)
            for (int t = 0; t < NBL; t++) begin
              logic [CT_W-1:0] ct;
              ct = cts[bt * BATCH + s];
              @(posedge clk);
              while (!cm_valid) @(posedge clk);
              beats++;
              if (m == 0 && t == 0) begin
                slot_start_cyc = cyc;
                check(fill_prev > bt * NLWE + i, $sformatf("slot started before key %0d was loaded", bt * NLWE + i));
              end
              if (m == K && t == NBL - 1)
                check(cyc - slot_start_cyc == SLOT_BEATS - 1, "slot beats not consecutive");
              check(cm_init == (i == 0) && cm_last == (i == NLWE - 1) && int'(cm_beat) == t,
                    $sformatf("flags of batch %0d iter %0d slot %0d", bt, i, s));
              check(cm_rot == ct[i*ROT_W +: ROT_W], $sformatf("rotation of batch %0d iter %0d slot %0d", bt, i, s));
            end
    repeat (5) @(posedge clk);
    check(!cm_valid, "extra beats after the last batch");
    check(pops == NBATCH, "batch pops");
    check(batches_started == NBATCH, "batches_started counter");
    check(lut_reads == NCT * (K + 1), "test polynomial reads");
    check(stall_bk_cycles > 0, "no key stall happened");
    check(stall_fb_cycles > 0, "no recirculation stall happened");
    $display("beats %0d, key stalls %0d, recirculation stalls %0d", beats, stall_bk_cycles, stall_fb_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // test polynomial reads: one per polynomial of each ciphertext in the first iteration
  always @(posedge clk) if (lut_rd_en) begin
    logic [CT_W-1:0] ct;
    ct = cts[(head + int'(peek_idx)) % NCT];
    lut_reads <= lut_reads + 1;
    check(lut_rd_b == ct[NLWE*ROT_W +: ROT_W] && lut_rd_lut == ct[CT_W-1 -: LUT_W], "test polynomial read fields");
  end
endmodule
