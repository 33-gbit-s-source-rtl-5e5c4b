// sync_fifo: single-clock FIFO placed after each Toeplitz extractor.
//
// Holds the b-bit pieces of extracted output until the aggregator has one
// word from every parallel block. Write when wr_en, read when rd_en (the
// read data is valid in the same cycle as rd_en, first-word fall-through
// from a memory array). empty/full flags; a write while full is dropped and
// sets the sticky overflow flag. The FIFO and its empty flag are part of the
// design; depth, the fall-through read and the overflow flag are this
// design's choices. DEPTH must be a power of two.
module sync_fifo #(
  parameter int unsigned WIDTH = 24,
  parameter int unsigned DEPTH = 128
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             wr_en,
  output logic             full,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty,
  output logic             overflow
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wr_ptr_q, rd_ptr_q;
  logic             do_wr, do_rd;

  assign empty   = (wr_ptr_q == rd_ptr_q);
  assign full    = (wr_ptr_q[AW-1:0] == rd_ptr_q[AW-1:0]) && (wr_ptr_q[AW] != rd_ptr_q[AW]);
  assign do_wr   = wr_en && !full;
  assign do_rd   = rd_en && !empty;
  assign rd_data = mem[rd_ptr_q[AW-1:0]];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr_q[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr_q <= '0;
      rd_ptr_q <= '0;
      overflow <= 1'b0;
    end else begin
      if (do_wr) wr_ptr_q <= wr_ptr_q + 1'b1;
      if (do_rd) rd_ptr_q <= rd_ptr_q + 1'b1;
      if (wr_en && full) overflow <= 1'b1;
    end
  end

  a_no_read_empty: assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> !empty);
  initial assert (DEPTH == (1 << AW)) else $error("DEPTH must be a power of two");
endmodule
