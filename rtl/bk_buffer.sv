// bk_buffer: ping-pong buffer for two bootstrapping-key coefficients BK_i and BK_i+1.
//
// Because all ciphertexts of a batch are at the same CMUX iteration, the CMUX needs only one
// key coefficient at a time. One bank is read by the MAC array while the other is filled from
// off-chip memory. A key coefficient is stored in the FFT domain as ROWS*NB words; word
// (row, beat) holds, for every output column and every one of the LANES FFT points of that beat,
// a complex BK_W-bit fixed-point value:
//   word[((col*LANES + lane)*2 + 0)*BK_W +: BK_W] = real part
//   word[((col*LANES + lane)*2 + 1)*BK_W +: BK_W] = imaginary part
// Fill side: wr_ready is high while the fill bank is empty; after ROWS*NB accepted words the
// bank is marked full, fill_count increments and filling moves to the other bank.
// Read side: rd_data is registered (one cycle after rd_addr). A pulse on release, given by the
// MAC array after the last ciphertext of a batch has used the key coefficient, empties the read
// bank and switches reading to the other bank. The bank protocol is this design's choice; the
// two-coefficient ping-pong organisation is the paper's.
module bk_buffer #(
  parameter int ROWS  = 6,
  parameter int NB    = 2,
  parameter int COLS  = 3,
  parameter int LANES = 128,
  parameter int BK_W  = 26
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              wr_valid,
  output logic                              wr_ready,
  input  logic [$clog2(ROWS*NB)-1:0]        wr_addr,
  input  logic [COLS*LANES*2*BK_W-1:0]      wr_data,
  input  logic [$clog2(ROWS*NB)-1:0]        rd_addr,
  output logic [COLS*LANES*2*BK_W-1:0]      rd_data,
  input  logic                              release_bank,
  output logic [31:0]                       fill_count,
  output logic [31:0]                       release_count
);
  localparam int WORDS = ROWS * NB;
  localparam int WW    = COLS * LANES * 2 * BK_W;
  localparam int AW    = $clog2(WORDS);

  logic [WW-1:0] mem0 [WORDS];
  logic [WW-1:0] mem1 [WORDS];
  logic [1:0]    full;
  logic          fill_bank, rd_bank;
  logic [AW:0]   fill_words;
  logic          wr;

  assign wr_ready = !full[fill_bank];
  assign wr       = wr_valid && wr_ready;

  always_ff @(posedge clk) begin
    if (wr && !fill_bank) mem0[wr_addr] <= wr_data;
    if (wr &&  fill_bank) mem1[wr_addr] <= wr_data;
    rd_data <= rd_bank ? mem1[rd_addr] : mem0[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full          <= '0;
      fill_bank     <= 1'b0;
      rd_bank       <= 1'b0;
      fill_words    <= '0;
      fill_count    <= '0;
      release_count <= '0;
    end else begin
      if (wr) begin
        if (fill_words == (AW+1)'(WORDS - 1)) begin
          fill_words <= '0;
          full[fill_bank] <= 1'b1;
          fill_bank  <= !fill_bank;
          fill_count <= fill_count + 1;
        end else begin
          fill_words <= fill_words + 1'b1;
        end
      end
      if (release_bank) begin
        full[rd_bank] <= 1'b0;
        rd_bank       <= !rd_bank;
        release_count <= release_count + 1;
      end
    end
  end

  a_release_full: assert property (@(posedge clk) disable iff (!rst_n) release_bank |-> full[rd_bank]);
endmodule
