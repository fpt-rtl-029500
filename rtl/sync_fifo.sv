// sync_fifo: single-clock first-word-fall-through FIFO.
//
// Used for the accumulator bypass and the accumulator recirculation buffer of the CMUX. The
// head entry is visible on dout whenever empty is low; pop removes it at the clock edge.
// Pushing while full or popping while empty is a protocol error and is flagged by assertions.
// The storage is a plain array that synthesis can map to RAM.
module sync_fifo #(
  parameter int W     = 8,
  parameter int DEPTH = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  logic [W-1:0]               din,
  input  logic                       pop,
  output logic [W-1:0]               dout,
  output logic                       empty,
  output logic                       full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wptr, rptr;

  assign dout  = mem[rptr];
  assign empty = (count == 0);
  assign full  = (count == ($clog2(DEPTH+1))'(DEPTH));

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (push) wptr <= (wptr == AW'(DEPTH - 1)) ? '0 : wptr + 1'b1;
      if (pop)  rptr <= (rptr == AW'(DEPTH - 1)) ? '0 : rptr + 1'b1;
      count <= count + ($clog2(DEPTH+1))'(push) - ($clog2(DEPTH+1))'(pop);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);
endmodule
