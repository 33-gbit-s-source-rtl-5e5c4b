// tb_aggregator: self-checking test of the aggregator (20 FIFOs x 24 bits).
//
// Twenty FIFO models are filled at random rates (one of them much slower,
// so the all-not-empty condition often fails) and the output is stalled at
// random. Checks: the FIFOs are read only when none is empty and always
// all together, each output vector is the concatenation of the FIFO heads
// (block 0 lowest), no vector is lost or repeated under back-pressure, and
// the vector count equals the words available in the slowest FIFO.
module tb_aggregator;
  localparam int unsigned N = 20, WIDTH = 24;
  logic clk = 0, rst_n = 0;
  logic [N-1:0][WIDTH-1:0] fifo_data;
  logic [N-1:0] fifo_empty, fifo_rd;
  logic [N*WIDTH-1:0] m_data;
  logic m_valid, m_ready;
  int checks = 0, failures = 0, cyc = 0, stalls = 0, outputs = 0;
  logic [WIDTH-1:0] q [N][$];
  logic [N*WIDTH-1:0] expq [$];
  int pushed [N];

  aggregator #(.N(N), .WIDTH(WIDTH)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s at %0t", what, $time); end
  endtask

  always_comb begin
    for (int n = 0; n < int'(N); n++) begin
      fifo_empty[n] = (q[n].size() == 0);
      fifo_data[n]  = fifo_empty[n] ? '0 : q[n][0];
    end
  end

  always @(posedge clk) if (rst_n) begin
    logic [N*WIDTH-1:0] v;
    cyc <= cyc + 1;
    // reads: all or none, only when none empty
    check(fifo_rd == '0 || (fifo_rd == '1 && fifo_empty == '0), "read pattern");
    if (fifo_rd == '1) begin
      for (int n = 0; n < int'(N); n++) v[n*WIDTH +: WIDTH] = q[n][0];
      expq.push_back(v);
      for (int n = 0; n < int'(N); n++) void'(q[n].pop_front());
    end
    if (m_valid && !m_ready) stalls++;
    if (m_valid && m_ready) begin
      check(expq.size() != 0 && m_data == expq[0], "output vector");
      if (expq.size() != 0) void'(expq.pop_front());
      outputs++;
    end
    // new FIFO words
    if (cyc < 600)
      for (int n = 0; n < int'(N); n++)
        if ($urandom_range(0, 99) < ((n == 7) ? 30 : 70)) begin
          q[n].push_back(WIDTH'($urandom)); pushed[n]++;
        end
  end

  always @(negedge clk) m_ready <= ($urandom_range(0, 99) < 70);

  initial begin
    int min_pushed;
    m_ready = 1;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    wait (cyc == 800);
    min_pushed = pushed[0];
    foreach (pushed[n]) if (pushed[n] < min_pushed) min_pushed = pushed[n];
    check(outputs == min_pushed, $sformatf("outputs %0d vs slowest FIFO %0d", outputs, min_pushed));
    check(stalls > 0, "back-pressure exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
