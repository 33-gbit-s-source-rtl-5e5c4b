// gearbox: width converter for a dense bit stream, IN_W bits in, OUT_W out.
//
// Incoming words are appended above the bits already held (first bit in is
// the least significant bit out); whenever at least OUT_W bits are held and
// the consumer is ready, the lowest OUT_W bits leave as one word. No bit is
// added or lost, so e.g. 16 input words of 240 bits become 15 of 256.
// The input has no back-pressure (a JESD204C link or a FIFO that is only
// popped while in_ready is high): in_ready is high while one more input word
// still fits, and a word offered while it is low is dropped and flagged in
// overflow (sticky until reset). Output is a register: out_valid/out_data
// follow the AXI4-Stream valid/ready rule. Latency is one cycle from an
// input word that completes an output word to that word at the output.
// Holding register: 2*(IN_W+OUT_W) bits (design choice).
module gearbox #(
  parameter int unsigned IN_W  = 480,
  parameter int unsigned OUT_W = 512
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [IN_W-1:0]  in_data,
  input  logic             in_valid,
  output logic             in_ready,
  output logic [OUT_W-1:0] out_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic             overflow
);
  localparam int unsigned HOLD_W = 2 * (IN_W + OUT_W);
  localparam int unsigned CNT_W  = $clog2(HOLD_W + 1);

  logic [HOLD_W-1:0] hold_q, hold_d;
  logic [CNT_W-1:0]  cnt_q, cnt_d;
  logic [HOLD_W-1:0] merged;
  logic [CNT_W-1:0]  merged_cnt;
  logic              take_out;
  logic              out_free;

  // Output register is free when empty or being consumed.
  assign out_free = !out_valid || out_ready;
  assign in_ready = (32'(cnt_q) + IN_W) <= HOLD_W;

  always_comb begin
    merged     = hold_q;
    merged_cnt = cnt_q;
    if (in_valid && in_ready) begin
      merged     = hold_q | (HOLD_W'(in_data) << cnt_q);
      merged_cnt = cnt_q + CNT_W'(IN_W);
    end
    take_out = out_free && (32'(merged_cnt) >= OUT_W);
    hold_d   = take_out ? (merged >> OUT_W) : merged;
    cnt_d    = take_out ? merged_cnt - CNT_W'(OUT_W) : merged_cnt;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold_q    <= '0;
      cnt_q     <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      overflow  <= 1'b0;
    end else begin
      hold_q <= hold_d;
      cnt_q  <= cnt_d;
      if (take_out) begin
        out_data  <= merged[OUT_W-1:0];
        out_valid <= 1'b1;
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
      if (in_valid && !in_ready) overflow <= 1'b1;
    end
  end
endmodule
