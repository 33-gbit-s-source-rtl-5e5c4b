// async_fifo: dual-clock FIFO for the crossing from the 160 MHz extraction
// clock to the 250 MHz PCIe clock.
//
// Classic Gray-pointer design: binary and Gray write/read pointers, each
// Gray pointer passed to the other domain through a two-flop synchronizer,
// full computed in the write domain and empty in the read domain, both
// conservative. Read data is first-word fall-through (valid while !empty).
// The design uses an asynchronous FIFO at this point; its construction and
// DEPTH (power of two) are this design's choices.
module async_fifo #(
  parameter int unsigned WIDTH = 480,
  parameter int unsigned DEPTH = 16
) (
  input  logic             wr_clk,
  input  logic             wr_rst_n,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             wr_en,
  output logic             full,
  input  logic             rd_clk,
  input  logic             rd_rst_n,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wbin_q, wgray_q, rbin_q, rgray_q;
  logic [AW:0] rgray_w1_q, rgray_w2_q;   // read pointer in write domain
  logic [AW:0] wgray_r1_q, wgray_r2_q;   // write pointer in read domain
  logic [AW:0] wbin_n, rbin_n;

  function automatic logic [AW:0] bin2gray(logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  assign wbin_n  = wbin_q + (AW+1)'(wr_en && !full);
  assign rbin_n  = rbin_q + (AW+1)'(rd_en && !empty);
  assign full    = (wgray_q == {~rgray_w2_q[AW:AW-1], rgray_w2_q[AW-2:0]});
  assign empty   = (rgray_q == wgray_r2_q);
  assign rd_data = mem[rbin_q[AW-1:0]];

  always_ff @(posedge wr_clk) begin
    if (wr_en && !full) mem[wbin_q[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge wr_clk or negedge wr_rst_n) begin
    if (!wr_rst_n) begin
      wbin_q     <= '0;
      wgray_q    <= '0;
      rgray_w1_q <= '0;
      rgray_w2_q <= '0;
    end else begin
      wbin_q     <= wbin_n;
      wgray_q    <= bin2gray(wbin_n);
      rgray_w1_q <= rgray_q;
      rgray_w2_q <= rgray_w1_q;
    end
  end

  always_ff @(posedge rd_clk or negedge rd_rst_n) begin
    if (!rd_rst_n) begin
      rbin_q     <= '0;
      rgray_q    <= '0;
      wgray_r1_q <= '0;
      wgray_r2_q <= '0;
    end else begin
      rbin_q     <= rbin_n;
      rgray_q    <= bin2gray(rbin_n);
      wgray_r1_q <= wgray_q;
      wgray_r2_q <= wgray_r1_q;
    end
  end

  initial assert (DEPTH == (1 << AW) && AW >= 2) else $error("DEPTH must be a power of two >= 4");
endmodule
