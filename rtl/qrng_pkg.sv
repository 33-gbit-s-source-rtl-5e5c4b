// qrng_pkg: shared sizes of the heterodyne QRNG extraction datapath.
//
// The numbers are those of the main configuration: two 12-bit ADC channels
// give b = 24 bits per round, N_S = 20 samples per channel arrive per
// 160 MHz cycle (480-bit bus), and each of the N_S parallel blocks hashes
// k_in = 2880 input bits into j = 1272 output bits with a Toeplitz matrix.
// The PCIe side is 512 bits wide. Lane count per link (8) is this design's
// assumption: 16 JESD204C lanes split over the two 256-bit links.
package qrng_pkg;
  localparam int unsigned SAMPLE_W       = 12;            // ADC resolution
  localparam int unsigned ROUND_W        = 2 * SAMPLE_W;  // b: CH1 + CH2 per round
  localparam int unsigned N_S            = 20;            // samples per channel per cycle
  localparam int unsigned BUS_W          = N_S * ROUND_W; // 480-bit packed ADC bus
  localparam int unsigned LINK_W         = 256;           // one JESD204C link word
  localparam int unsigned LANES_PER_LINK = 8;
  localparam int unsigned J_OUT          = 1272;          // j: extracted bits per block
  localparam int unsigned K_IN           = 2880;          // k_in: input bits per block
  localparam int unsigned N_STAGES       = 3;             // stages between generation and accumulation
  localparam int unsigned PCIE_W         = 512;           // PCIe AXI4-Stream width

  // Ceiling of a / b, used for counter widths.
  function automatic int unsigned cdiv(int unsigned a, int unsigned b);
    return (a + b - 1) / b;
  endfunction
endpackage
