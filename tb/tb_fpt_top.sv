// tb_fpt_top: end-to-end bootstrapping test of fpt_top at reduced sizes (N = 32, n = 5,
// batches of 2 ciphertexts, streaming width 8), two batches back to back. With a batch this
// small the pipeline is longer than a batch, so recirculation stalls occur; key stalls are
// provoked by delaying the key feeder. See fpt_e2e_body.svh for the test itself.
module tb_fpt_top;
  localparam int T_NLWE = 5, T_K = 2, T_N = 32, T_SW = 8, T_B = 2, T_NLUT = 2, T_NBATCH = 2;
  localparam int T_TOL = 1024;
  localparam bit T_CHECK_RATE = 1'b0, T_EXPECT_FB_STALL = 1'b1;

`include "fpt_e2e_body.svh"

  fpt_top #(.P_NLWE(T_NLWE), .P_K(T_K), .P_N(T_N), .P_SW_FFT(T_SW), .P_BATCH(T_B),
            .P_NUM_LUT(T_NLUT)) u_dut (.*);
endmodule
