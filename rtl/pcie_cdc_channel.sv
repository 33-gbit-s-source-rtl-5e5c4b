// pcie_cdc_channel: hands a 480-bit stream from the extraction clock
// domain to the 512-bit AXI4-Stream of the PCIe DMA engine.
//
// The stream is written into an asynchronous FIFO in the source clock
// domain; in the PCIe clock domain a gearbox re-cuts the 480-bit words into
// dense 512-bit words (16 words of 480 bits become 15 of 512) for the
// m_axis_* port, which follows AXI4-Stream valid/ready. s_ready is the
// FIFO's !full; a source without back-pressure (the raw-data copy) loses
// the words offered while s_ready is low, and drop_count counts them in the
// source domain. The asynchronous FIFO in front of the PCIe interface
// follows the design; the 480-to-512 repacking, FIFO depth and drop counter
// are this design's choices.
module pcie_cdc_channel #(
  parameter int unsigned IN_W  = 480,
  parameter int unsigned OUT_W = 512,
  parameter int unsigned DEPTH = 16
) (
  input  logic             s_clk,
  input  logic             s_rst_n,
  input  logic [IN_W-1:0]  s_data,
  input  logic             s_valid,
  output logic             s_ready,
  output logic [31:0]      drop_count,
  input  logic             m_clk,
  input  logic             m_rst_n,
  output logic [OUT_W-1:0] m_axis_tdata,
  output logic             m_axis_tvalid,
  input  logic             m_axis_tready
);
  logic            full, empty;
  logic [IN_W-1:0] rd_data;
  logic            gb_in_ready;
  logic            gb_ovf;
  logic            pop;

  assign s_ready = !full;
  assign pop     = !empty && gb_in_ready;

  async_fifo #(.WIDTH(IN_W), .DEPTH(DEPTH)) u_fifo (
    .wr_clk(s_clk), .wr_rst_n(s_rst_n), .wr_data(s_data), .wr_en(s_valid), .full,
    .rd_clk(m_clk), .rd_rst_n(m_rst_n), .rd_en(pop), .rd_data, .empty
  );

  gearbox #(.IN_W(IN_W), .OUT_W(OUT_W)) u_gb (
    .clk(m_clk), .rst_n(m_rst_n),
    .in_data(rd_data), .in_valid(pop), .in_ready(gb_in_ready),
    .out_data(m_axis_tdata), .out_valid(m_axis_tvalid), .out_ready(m_axis_tready),
    .overflow(gb_ovf)
  );

  always_ff @(posedge s_clk or negedge s_rst_n) begin
    if (!s_rst_n)              drop_count <= '0;
    else if (s_valid && full)  drop_count <= drop_count + 1'b1;
  end

  // The gearbox is only fed while it has room.
  a_gb_no_overflow: assert property (@(posedge m_clk) disable iff (!m_rst_n) !gb_ovf);
endmodule
