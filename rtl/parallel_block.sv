// parallel_block: one of the N_S identical extraction blocks.
//
// Buffer -> Toeplitz extraction -> FIFO. The buffer collects k_in bits of
// the packed ADC bus once read_enable is pulsed and pulses buffer_full when
// it has them (the read_enable of the next block in the daisy chain). The
// extractor hashes the block into j bits and writes them as j/b words of
// b bits into the block FIFO, which the aggregator reads through
// fifo_rd/fifo_data/fifo_empty. All blocks share the same public seed.
// err collects the sticky error flags of the three parts (buffer overrun,
// output-stage collision, FIFO overflow); none is set in normal operation.
// The structure follows the design; the error flags are this design's.
module parallel_block #(
  parameter int unsigned J          = 1272,
  parameter int unsigned K          = 2880,
  parameter int unsigned B          = 24,
  parameter int unsigned BUS_W      = 480,
  parameter int unsigned N_STAGES   = 3,
  parameter int unsigned FIFO_DEPTH = 128
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [J+K-1:0]   seed,
  input  logic [BUS_W-1:0] s_data,
  input  logic             s_valid,
  input  logic             read_enable,
  output logic             buffer_full,
  input  logic             fifo_rd,
  output logic [B-1:0]     fifo_data,
  output logic             fifo_empty,
  output logic             block_done,
  output logic [2:0]       err
);
  logic [K-1:0] d_block;
  logic         d_valid, d_release;
  logic [B-1:0] x_data;
  logic         x_valid;
  logic         unused_full;

  block_buffer #(.K(K), .BUS_W(BUS_W)) u_buffer (
    .clk, .rst_n, .s_data, .s_valid, .read_enable, .buffer_full,
    .d_block, .d_valid, .d_release, .overrun(err[0])
  );

  toeplitz_extractor #(.J(J), .K(K), .B(B), .N_STAGES(N_STAGES)) u_extract (
    .clk, .rst_n, .seed, .d_block, .d_valid, .d_release,
    .out_data(x_data), .out_valid(x_valid), .block_done, .out_collision(err[1])
  );

  sync_fifo #(.WIDTH(B), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .wr_data(x_data), .wr_en(x_valid), .full(unused_full),
    .rd_en(fifo_rd), .rd_data(fifo_data), .empty(fifo_empty), .overflow(err[2])
  );
endmodule
