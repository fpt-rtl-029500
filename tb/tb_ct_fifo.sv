// tb_ct_fifo: self-checking test of the input ciphertext FIFO.
//
// Random ciphertext words are pushed until the FIFO refuses (in_ready low at DEPTH entries).
// The test then reads every slot of the oldest batch through the peek port and compares it with
// the pushed order, pops one batch and checks the count and the next batch's contents. Pushing
// and popping in the same cycle is exercised at the end. Reduced width (W = 40) and the
// paper's batch of 12 with a two-batch depth.
module tb_ct_fifo;
  localparam int W = 40, BATCH = 12, DEPTH = 2 * BATCH;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, in_ready, pop_batch = 1'b0;
  logic [W-1:0] in_ct = '0, peek_ct;
  logic [$clog2(DEPTH)-1:0] peek_idx = '0;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] ref_q [$];

  ct_fifo #(.W(W), .DEPTH(DEPTH), .BATCH(BATCH)) dut (.*);

  always #5 clk = ~clk;
  initial begin #100000; $display("watchdog expired"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic push_one();
    logic [W-1:0] w;
    w = {$urandom, $urandom};
    @(negedge clk);
    in_ct = w; in_valid = 1'b1;
    @(posedge clk);
    if (in_ready) ref_q.push_back(w);
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  task automatic check_batch();
    for (int i = 0; i < BATCH; i++) begin
      @(negedge clk);
      peek_idx = ($clog2(DEPTH))'(i);
      #1 check(peek_ct == ref_q[i], $sformatf("peek %0d", i));
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < DEPTH + 3; i++) push_one();
    check(count == ($clog2(DEPTH+1))'(DEPTH), "count after filling");
    check(ref_q.size() == DEPTH, "accepted exactly DEPTH words");
    @(negedge clk);
    check(!in_ready, "in_ready low when full");
    check_batch();
    @(negedge clk);
    pop_batch = 1'b1;
    @(negedge clk);
    pop_batch = 1'b0;
    for (int i = 0; i < BATCH; i++) void'(ref_q.pop_front());
    check(count == ($clog2(DEPTH+1))'(BATCH), "count after pop");
    check_batch();
    // push while popping the second batch
    @(negedge clk);
    in_ct = {$urandom, $urandom}; in_valid = 1'b1; pop_batch = 1'b1;
    @(posedge clk);
    if (in_ready) ref_q.push_back(in_ct);
    @(negedge clk);
    in_valid = 1'b0; pop_batch = 1'b0;
    for (int i = 0; i < BATCH; i++) void'(ref_q.pop_front());
    check(count == 1, "count after simultaneous push and pop");
    @(negedge clk); peek_idx = '0;
    #1 check(peek_ct == ref_q[0], "oldest word after wrap");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
