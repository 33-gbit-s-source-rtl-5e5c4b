// aggregator: collates the outputs of the N parallel extraction blocks.
//
// The empty flags of the N block FIFOs are combined (an AND over their
// negations); only when no FIFO is empty are all N FIFOs read in the same
// cycle, and their words are concatenated into one N*WIDTH-bit vector,
// block 0 in the least significant bits (480 bits by default). The output
// is an AXI4-Stream register (m_valid/m_data, m_ready): a new vector is
// taken only while the register is empty or being consumed. The all-not-
// empty condition and the collation follow the design; the bit order and
// the output register are this design's choices. Latency: one cycle.
module aggregator #(
  parameter int unsigned N     = 20,
  parameter int unsigned WIDTH = 24
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [N-1:0][WIDTH-1:0] fifo_data,
  input  logic [N-1:0]           fifo_empty,
  output logic [N-1:0]           fifo_rd,
  output logic [N*WIDTH-1:0]     m_data,
  output logic                   m_valid,
  input  logic                   m_ready
);
  logic all_ready;
  logic take;

  assign all_ready = &(~fifo_empty);
  assign take      = all_ready && (!m_valid || m_ready);
  assign fifo_rd   = {N{take}};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_valid <= 1'b0;
      m_data  <= '0;
    end else if (take) begin
      m_valid <= 1'b1;
      m_data  <= fifo_data;
    end else if (m_ready) begin
      m_valid <= 1'b0;
    end
  end
endmodule
