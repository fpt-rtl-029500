// test_poly_ram: on-chip RAM of test polynomials F and the blind-rotation initialisation.
//
// The RAM holds NUM_LUT test polynomials, each made of K+1 polynomials of N coefficients of
// ACC_W bits (the upper bits of the 32-bit torus). One word is one whole polynomial, written by
// the host through wr_*. Every input ciphertext carries the index of the test polynomial it
// wants; for the first CMUX iteration the controller requests polynomial rd_poly of test
// polynomial rd_lut together with the ciphertext's rounded b, and one cycle later rot_poly holds
// ACC = F * X^-b (negacyclic rotation by 2N - b, wrapped coefficients negated). The result stays
// on rot_poly until the next request. Holding a configurable number of test polynomials
// selected by a tag follows the paper; the word organisation and the rotation on read are this
// design's choice.
module test_poly_ram #(
  parameter int N       = 512,
  parameter int K       = 2,
  parameter int NUM_LUT = 4,
  parameter int ACC_W   = 16
) (
  input  logic                                 clk,
  input  logic                                 wr_en,
  input  logic [$clog2(NUM_LUT*(K+1))-1:0]     wr_addr,
  input  logic [N-1:0][ACC_W-1:0]              wr_poly,
  input  logic                                 rd_en,
  input  logic [$clog2(NUM_LUT)-1:0]           rd_lut,
  input  logic [$clog2(K+1)-1:0]               rd_poly,
  input  logic [$clog2(2*N)-1:0]               rd_b,
  output logic [N-1:0][ACC_W-1:0]              rot_poly
);
  localparam int RW = $clog2(2*N);
  localparam int AW = $clog2(NUM_LUT*(K+1));

  logic [N-1:0][ACC_W-1:0] mem [NUM_LUT*(K+1)];
  logic [N-1:0][ACC_W-1:0] sel, rotd;
  logic [N-1:0]            neg;
  logic [RW-1:0]           rot;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_poly;
  end

  // X^-b = X^(2N-b)
  assign rot = RW'(2*N) - rd_b;
  assign sel = mem[AW'(int'(rd_lut) * (K+1) + int'(rd_poly))];

  negacyclic_rotate #(.N(N), .W(ACC_W)) u_rot (.din(sel), .rot(rot), .dout(rotd), .neg(neg));

  always_ff @(posedge clk) begin
    if (rd_en)
      for (int i = 0; i < N; i++) rot_poly[i] <= neg[i] ? -rotd[i] : rotd[i];
  end
endmodule
