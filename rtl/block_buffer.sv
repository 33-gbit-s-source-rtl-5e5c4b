// block_buffer: input buffer of one parallel extraction block.
//
// The buffer takes no data until read_enable is pulsed. It then stores the
// next BEATS = K/BUS_W valid words of the packed ADC bus (6 words of 480
// bits = 2880 bits = 120 rounds of 24 bits by default), the first word in
// the least significant bits. In the cycle it takes the last word it raises
// buffer_full for one cycle; in the daisy chain this pulse is the
// read_enable of the next block, so the next block takes the very next bus
// word and no sample is skipped or duplicated.
//
// A full collection is then moved into the block register D that the
// Toeplitz extractor reads word by word (d_block, d_valid). The extractor
// pulses d_release in the cycle it reads the last word of D; a waiting
// collection is moved into D in that same cycle, so back-to-back blocks
// run without a gap. Collection and D are separate registers (double
// buffering) so that the next collection may start while D is still being
// hashed. The read-enable/buffer-full behaviour follows the design; the
// pulse form of the two signals and the double buffering are this design's
// choices. overrun is a sticky flag, set if a finished collection would be
// overwritten before it could move into D.
module block_buffer #(
  parameter int unsigned K     = 2880,
  parameter int unsigned BUS_W = 480
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [BUS_W-1:0] s_data,
  input  logic             s_valid,
  input  logic             read_enable,
  output logic             buffer_full,
  output logic [K-1:0]     d_block,
  output logic             d_valid,
  input  logic             d_release,
  output logic             overrun
);
  localparam int unsigned BEATS = K / BUS_W;
  localparam int unsigned BC_W  = (BEATS > 1) ? $clog2(BEATS) : 1;

  logic             collecting_q;
  logic [BC_W-1:0]  beat_q;
  logic [K-1:0]     fill_q;
  logic             pending_q;
  logic             take;

  assign take        = collecting_q && s_valid;
  assign buffer_full = take && (beat_q == BC_W'(BEATS - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      collecting_q <= 1'b0;
      beat_q       <= '0;
      fill_q       <= '0;
      pending_q    <= 1'b0;
      d_block      <= '0;
      d_valid      <= 1'b0;
      overrun      <= 1'b0;
    end else begin
      if (take) begin
        fill_q[beat_q*BUS_W +: BUS_W] <= s_data;
        beat_q <= buffer_full ? '0 : beat_q + 1'b1;
      end
      if (buffer_full)      collecting_q <= 1'b0;
      else if (read_enable) collecting_q <= 1'b1;

      // Move a finished collection into D when D is free
      if (pending_q && (!d_valid || d_release)) begin
        d_block   <= fill_q;
        d_valid   <= 1'b1;
        pending_q <= buffer_full;
      end else begin
        if (d_release)   d_valid   <= 1'b0;
        if (buffer_full) pending_q <= 1'b1;
      end
      if (buffer_full && pending_q && d_valid && !d_release) overrun <= 1'b1;
    end
  end

  initial assert (K % BUS_W == 0) else $error("K must be a multiple of BUS_W");
endmodule
