// ct_fifo: on-chip FIFO of input TLWE ciphertexts.
//
// Each entry is one packed ciphertext {lut, b, a_n, ..., a_1}, where the a_i and b are already
// rounded to rotations in [0, 2N) by the host. The bootstrapping controller needs random access
// to the BATCH ciphertexts at the head (it walks over them once per CMUX iteration), so the FIFO
// has a peek port that reads entry head+peek_idx combinationally, and a pop_batch input that
// removes the whole head batch in one cycle. With DEPTH = 2*BATCH the host can queue the next
// batch while the current one is being bootstrapped, which is the prefetching the paper uses to
// avoid bubbles between batches. The peek port and batch pop are this design's choice; the
// paper only states that the next batch is prefetched into an on-chip FIFO.
module ct_fifo #(
  parameter int W     = 5880,
  parameter int DEPTH = 24,
  parameter int BATCH = 12
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic [W-1:0]               in_ct,
  input  logic [$clog2(DEPTH)-1:0]   peek_idx,
  output logic [W-1:0]               peek_ct,
  input  logic                       pop_batch,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = $clog2(DEPTH);
  localparam int CW = $clog2(DEPTH+1);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wptr, rptr;
  logic          push;

  function automatic logic [AW-1:0] wrap(int v);
    return AW'(v % DEPTH);
  endfunction

  assign in_ready = (count < CW'(DEPTH));
  assign push     = in_valid && in_ready;
  assign peek_ct  = mem[wrap(int'(rptr) + int'(peek_idx))];

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= in_ct;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (push)      wptr <= wrap(int'(wptr) + 1);
      if (pop_batch) rptr <= wrap(int'(rptr) + BATCH);
      count <= count + (push ? CW'(1) : CW'(0)) - (pop_batch ? CW'(BATCH) : CW'(0));
    end
  end

  a_pop_full_batch: assert property (@(posedge clk) disable iff (!rst_n)
                                     pop_batch |-> (count >= CW'(BATCH)));
endmodule
