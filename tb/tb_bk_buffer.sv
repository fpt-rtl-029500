// tb_bk_buffer: self-checking test of the double-buffered bootstrapping-key buffer.
//
// Five random keys are streamed in (word order shuffled) while a reader consumes them. The
// test checks that the first two keys are accepted back to back (both banks free), that the
// third key waits (wr_ready low) until the reader releases a bank, that every read word equals
// the written word of the current key one cycle after its address (registered read), and the
// fill and release counters. Reduced lane count (LANES = 4); rows, blocks and columns are the
// defaults.
module tb_bk_buffer;
  localparam int ROWS = 6, NB = 2, COLS = 3, LANES = 4, BK_W = 26, NKEY = 5;
  localparam int WORDS = ROWS * NB, DW = COLS * LANES * 2 * BK_W;
  logic clk = 1'b0, rst_n = 1'b0;
  logic wr_valid = 1'b0, wr_ready, release_bank = 1'b0;
  logic [$clog2(WORDS)-1:0] wr_addr = '0, rd_addr = '0;
  logic [DW-1:0] wr_data = '0, rd_data;
  logic [31:0] fill_count, release_count;
  int checks = 0, failures = 0;
  logic [DW-1:0] key [NKEY][WORDS];
  int blocked = 0;

  bk_buffer #(.ROWS(ROWS), .NB(NB), .COLS(COLS), .LANES(LANES), .BK_W(BK_W)) dut (.*);

  always #5 clk = ~clk;
  initial begin #200000; $display("watchdog expired"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // writer
  initial begin
    for (int k = 0; k < NKEY; k++)
      for (int w = 0; w < WORDS; w++)
        for (int b = 0; b < DW; b += 32) key[k][w][b +: 32] = $urandom;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < NKEY; k++) begin
      int order [WORDS];
      for (int w = 0; w < WORDS; w++) order[w] = w;
      order.shuffle();
      for (int w = 0; w < WORDS; w++) begin
        @(negedge clk);
        wr_valid = 1'b1; wr_addr = ($clog2(WORDS))'(order[w]); wr_data = key[k][order[w]];
        while (!wr_ready) begin blocked++; @(negedge clk); end
        @(posedge clk);
      end
      @(negedge clk);
      wr_valid = 1'b0;
    end
  end

  // reader: waits for key k, reads every word, releases the bank
  initial begin
    @(posedge rst_n);
    repeat (2 * WORDS + 20) @(posedge clk);
    check(fill_count == 2, "two keys buffered before any release");
    check(blocked > 0, "writer blocked while both banks full");
    for (int k = 0; k < NKEY; k++) begin
      while (fill_count <= 32'(k)) @(negedge clk);
      for (int w = 0; w < WORDS; w++) begin
        @(negedge clk);
        rd_addr = ($clog2(WORDS))'(w);
        @(negedge clk);
        check(rd_data == key[k][w], $sformatf("key %0d word %0d", k, w));
      end
      @(negedge clk);
      release_bank = 1'b1;
      @(negedge clk);
      release_bank = 1'b0;
    end
    @(negedge clk);
    check(fill_count == NKEY, "fill count");
    check(release_count == NKEY, "release count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
