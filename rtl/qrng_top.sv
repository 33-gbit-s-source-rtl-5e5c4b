// qrng_top: FPGA datapath of the heterodyne QRNG, from the two JESD204C
// links of the dual-channel 12-bit ADC to the 512-bit PCIe DMA streams.
//
// Data flow: the transport layer turns the two 256-bit links into one
// 480-bit word per 160 MHz cycle (N_S = 20 rounds of 24 bits, CH1 and CH2).
// Every word goes to all N_S parallel blocks, but only one block takes it:
// the blocks are daisy-chained, each block's buffer_full starting the next
// block's buffer, and the last block's buffer_full is ORed with a one-shot
// start-chain pulse (raised when the first ADC word arrives after reset) to
// restart the first block. With k_in = 2880 bits a block fills in 6 cycles
// and is hashed in k_in/b = 120 cycles, so N_S blocks exactly keep up
// with the ADC. Each block writes j = 1272 extracted bits as 53 words of 24
// bits into its FIFO; when no FIFO is empty the aggregator reads one word
// from each and forms a 480-bit vector. That vector stream crosses into
// the PCIe clock domain through an asynchronous FIFO and leaves as 512-bit
// AXI4-Stream words (m_axis_rng_*). A second such channel carries the raw,
// unextracted ADC words (m_axis_raw_*) for monitoring; it has no
// back-pressure on the datapath and counts what it has to drop.
//
// Net rate: N_S * j bits per k_in/b cycles = 20*1272/120*160 MHz =
// 33.92 Gbit/s. The JESD204C PHY/link layer, the PCIe DMA engine, clock
// generation and the seed source are outside this module: their signals
// are ports. Structure and sizes follow the design; the one-shot start
// pulse, the raw channel's drop policy and the status outputs are this
// design's choices.
module qrng_top
  import qrng_pkg::*;
#(
  parameter int unsigned NB         = N_S,        // parallel blocks = samples per cycle
  parameter int unsigned SMP_W      = SAMPLE_W,
  parameter int unsigned J          = J_OUT,
  parameter int unsigned K          = K_IN,
  parameter int unsigned L_W        = LINK_W,
  parameter int unsigned LANES      = LANES_PER_LINK,
  parameter int unsigned OUT_W      = PCIE_W,
  parameter int unsigned FIFO_DEPTH = 128,
  parameter int unsigned CDC_DEPTH  = 16
) (
  input  logic                  clk,          // 160 MHz ADC/extraction clock
  input  logic                  rst_n,
  input  logic                  pcie_clk,     // 250 MHz PCIe user clock
  input  logic                  pcie_rst_n,
  input  logic [1:0][L_W-1:0]   link_data,    // link 0 = CH1, link 1 = CH2
  input  logic [1:0]            link_valid,
  input  logic [J+K-1:0]        seed,         // public Toeplitz seed
  output logic [OUT_W-1:0]      m_axis_rng_tdata,
  output logic                  m_axis_rng_tvalid,
  input  logic                  m_axis_rng_tready,
  output logic [OUT_W-1:0]      m_axis_raw_tdata,
  output logic                  m_axis_raw_tvalid,
  input  logic                  m_axis_raw_tready,
  output logic                  err_overflow,   // sticky: any datapath overflow
  output logic [31:0]           raw_drop_count
);
  localparam int unsigned B     = 2 * SMP_W;
  localparam int unsigned BW = NB * B;

  logic [BW-1:0]       adc_data;
  logic                   adc_valid;
  logic                   tl_ovf;
  logic                   started_q;
  logic                   start_chain;
  logic [NB-1:0]          read_enable, buffer_full, fifo_empty, fifo_rd, block_done;
  logic [NB-1:0][B-1:0]   fifo_data;
  logic [NB-1:0][2:0]     blk_err;
  logic [BW-1:0]       agg_data;
  logic                   agg_valid, agg_ready;
  logic [31:0]            rng_drop_unused;
  logic                   raw_ready_unused;

  transport_layer #(.N_SMP(NB), .SMP_W(SMP_W), .L_W(L_W), .LANES(LANES)) u_transport (
    .clk, .rst_n, .link_data, .link_valid,
    .m_data(adc_data), .m_valid(adc_valid), .overflow(tl_ovf)
  );

  // Start chain: one pulse when ADC data first becomes valid.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         started_q <= 1'b0;
    else if (adc_valid) started_q <= 1'b1;
  end
  assign start_chain = adc_valid && !started_q;

  // Daisy chain of read enables / buffer full flags.
  always_comb begin
    read_enable[0] = start_chain || buffer_full[NB-1];
    for (int n = 1; n < int'(NB); n++) read_enable[n] = buffer_full[n-1];
  end

  for (genvar n = 0; n < int'(NB); n++) begin : g_blk
    parallel_block #(.J(J), .K(K), .B(B), .BUS_W(BW), .N_STAGES(N_STAGES),
                     .FIFO_DEPTH(FIFO_DEPTH)) u_blk (
      .clk, .rst_n, .seed,
      .s_data(adc_data), .s_valid(adc_valid),
      .read_enable(read_enable[n]), .buffer_full(buffer_full[n]),
      .fifo_rd(fifo_rd[n]), .fifo_data(fifo_data[n]), .fifo_empty(fifo_empty[n]),
      .block_done(block_done[n]), .err(blk_err[n])
    );
  end

  aggregator #(.N(NB), .WIDTH(B)) u_aggregate (
    .clk, .rst_n, .fifo_data, .fifo_empty, .fifo_rd,
    .m_data(agg_data), .m_valid(agg_valid), .m_ready(agg_ready)
  );

  // Extracted data to PCIe (back-pressured, never dropped)
  pcie_cdc_channel #(.IN_W(BW), .OUT_W(OUT_W), .DEPTH(CDC_DEPTH)) u_rng_cdc (
    .s_clk(clk), .s_rst_n(rst_n),
    .s_data(agg_data), .s_valid(agg_valid), .s_ready(agg_ready), .drop_count(rng_drop_unused),
    .m_clk(pcie_clk), .m_rst_n(pcie_rst_n),
    .m_axis_tdata(m_axis_rng_tdata), .m_axis_tvalid(m_axis_rng_tvalid),
    .m_axis_tready(m_axis_rng_tready)
  );

  // Raw ADC words to PCIe (monitoring copy, dropped when the host lags)
  pcie_cdc_channel #(.IN_W(BW), .OUT_W(OUT_W), .DEPTH(CDC_DEPTH)) u_raw_cdc (
    .s_clk(clk), .s_rst_n(rst_n),
    .s_data(adc_data), .s_valid(adc_valid), .s_ready(raw_ready_unused), .drop_count(raw_drop_count),
    .m_clk(pcie_clk), .m_rst_n(pcie_rst_n),
    .m_axis_tdata(m_axis_raw_tdata), .m_axis_tvalid(m_axis_raw_tvalid),
    .m_axis_tready(m_axis_raw_tready)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) err_overflow <= 1'b0;
    else if (tl_ovf || (|blk_err)) err_overflow <= 1'b1;
  end

  initial assert (K % BW == 0) else $error("k_in must be a multiple of the bus width");
endmodule
