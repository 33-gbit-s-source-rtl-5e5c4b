// tb_qrng_top: end-to-end test of qrng_top at a reduced size (4 parallel
// blocks, j = 48, k_in = 192, 64-bit links of two lanes) over 40 rotations
// of the block chain. The checks are described in qrng_top_tb_body.svh.
module tb_qrng_top;
  localparam int unsigned NB = 4, SMP_W = 12, J = 48, K = 192, L_W = 64, LANES = 2;
  localparam int NROT = 40, RNG_STALL = 150, RAW_STALL = 80;
  `include "qrng_top_tb_body.svh"
  qrng_top #(.NB(NB), .SMP_W(SMP_W), .J(J), .K(K), .L_W(L_W), .LANES(LANES)) dut (.*);
endmodule
