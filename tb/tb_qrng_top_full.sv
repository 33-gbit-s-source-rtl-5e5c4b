// tb_qrng_top_full: end-to-end test of qrng_top with every parameter at its
// default (20 parallel blocks, j = 1272, k_in = 2880, two 256-bit links,
// 512-bit PCIe streams) over 3 rotations of the block chain, i.e. 60
// extracted blocks. The checks are described in qrng_top_tb_body.svh.
module tb_qrng_top_full;
  localparam int unsigned NB = 20, SMP_W = 12, J = 1272, K = 2880, L_W = 256, LANES = 8;
  localparam int NROT = 3, RNG_STALL = 120, RAW_STALL = 80;
  `include "qrng_top_tb_body.svh"
  qrng_top dut (.*);
endmodule
