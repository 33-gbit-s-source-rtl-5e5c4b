// transport_layer: JESD204C transport layer for the two ADC channels.
//
// Each ADC channel arrives on its own 256-bit link (link 0 = CH1,
// link 1 = CH2). The transport layer does three things, in the order the
// design describes them: (1) lane mapping - the LANES_PER_LINK 32-bit lanes
// of a link are reordered by LANE_MAP (output lane l takes input lane
// LANE_MAP[l]); (2) sample extraction - the lane-ordered payload is treated
// as a dense stream of 12-bit samples, sample 0 in the least significant
// bits, and a gearbox per link cuts it into words of N_S samples; (3)
// packing - the N_S CH1 and N_S CH2 samples are interleaved into one
// 480-bit AXI4-Stream word of N_S 24-bit rounds, round s in bits
// [24s+23:24s] holding {CH2 sample s, CH1 sample s}.
//
// The three steps and the 480-bit interleaved output follow the design;
// the dense 12-bit frame layout, the default identity LANE_MAP and the
// placement of CH1 in the low half of a round are this design's choices.
// A 256-bit link carries more than 240 bits of samples per cycle, so links
// are valid on about 15 of 16 cycles; output words then come every cycle.
// The two links are expected to be aligned (deterministic latency); a
// skew of a few words is absorbed by the gearboxes. No back-pressure: the
// downstream blocks take every word. Latency: one cycle (gearbox register).
module transport_layer
  import qrng_pkg::*;
#(
  parameter int unsigned N_SMP   = N_S,
  parameter int unsigned SMP_W   = SAMPLE_W,
  parameter int unsigned L_W     = LINK_W,
  parameter int unsigned LANES   = LANES_PER_LINK,
  parameter logic [LANES*$clog2(LANES)-1:0] LANE_MAP = identity_map(LANES)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [1:0][L_W-1:0]        link_data,
  input  logic [1:0]                 link_valid,
  output logic [N_SMP*2*SMP_W-1:0]   m_data,
  output logic                       m_valid,
  output logic                       overflow
);
  localparam int unsigned LANE_W = L_W / LANES;
  localparam int unsigned SEL_W  = $clog2(LANES);
  localparam int unsigned CH_W   = N_SMP * SMP_W;

  function automatic logic [LANES*$clog2(LANES)-1:0] identity_map(int unsigned n);
    logic [LANES*$clog2(LANES)-1:0] m;
    m = '0;
    for (int unsigned l = 0; l < n; l++) m[l*$clog2(LANES) +: $clog2(LANES)] = ($clog2(LANES))'(l);
    return m;
  endfunction

  logic [1:0][L_W-1:0]  mapped;
  logic [1:0][CH_W-1:0] ch_data;
  logic [1:0]           ch_valid;
  logic [1:0]           ch_ovf;
  logic                 join_fire;

  // Lane mapping
  always_comb begin
    for (int k = 0; k < 2; k++)
      for (int l = 0; l < int'(LANES); l++)
        mapped[k][l*LANE_W +: LANE_W] =
          link_data[k][LANE_MAP[l*SEL_W +: SEL_W]*LANE_W +: LANE_W];
  end

  assign join_fire = ch_valid[0] && ch_valid[1];

  // Sample extraction: one gearbox per channel
  for (genvar k = 0; k < 2; k++) begin : g_ch
    logic unused_ready;
    gearbox #(.IN_W(L_W), .OUT_W(CH_W)) u_gb (
      .clk, .rst_n,
      .in_data  (mapped[k]),
      .in_valid (link_valid[k]),
      .in_ready (unused_ready),
      .out_data (ch_data[k]),
      .out_valid(ch_valid[k]),
      .out_ready(join_fire),
      .overflow (ch_ovf[k])
    );
  end

  // Packing: interleave CH1/CH2 into 24-bit rounds
  always_comb begin
    for (int s = 0; s < int'(N_SMP); s++)
      m_data[s*2*SMP_W +: 2*SMP_W] = {ch_data[1][s*SMP_W +: SMP_W], ch_data[0][s*SMP_W +: SMP_W]};
  end
  assign m_valid  = join_fire;
  assign overflow = |ch_ovf;
endmodule
