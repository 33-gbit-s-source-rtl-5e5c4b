// tb_sync_fifo: self-checking test of the block FIFO (24 bits x 128).
//
// Random writes and reads against a queue model: every read word, the
// empty and full flags and the sticky overflow flag are compared with the
// model. A phase fills the FIFO to the top and writes once more while
// full, then drains it completely.
module tb_sync_fifo;
  localparam int unsigned WIDTH = 24, DEPTH = 128;
  logic clk = 0, rst_n = 0;
  logic [WIDTH-1:0] wr_data, rd_data;
  logic wr_en, rd_en, full, empty, overflow;
  int checks = 0, failures = 0;
  logic [WIDTH-1:0] model [$];
  bit model_ovf = 0;

  sync_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s at %0t", what, $time); end
  endtask

  task automatic cycle(bit w, bit r);
    bit was_full;
    wr_en = w; wr_data = WIDTH'($urandom);
    #0 rd_en = r && (model.size() != 0) && !empty;
    #1;
    check(empty == (model.size() == 0), "empty flag");
    check(full == (model.size() == int'(DEPTH)), "full flag");
    if (rd_en) check(rd_data == model[0], $sformatf("read data %h exp %h", rd_data, model[0]));
    // a write is accepted only if the FIFO was not full before the edge
    was_full = (model.size() == int'(DEPTH));
    @(posedge clk);
    if (rd_en) void'(model.pop_front());
    if (w) begin
      if (!was_full) model.push_back(wr_data);
      else model_ovf = 1;
    end
    #1;
    check(overflow == model_ovf, "overflow flag");
  endtask

  initial begin
    wr_en = 0; rd_en = 0; wr_data = '0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    repeat (400) cycle($urandom_range(0, 99) < 60, $urandom_range(0, 99) < 50);
    while (model.size() < int'(DEPTH)) cycle(1, 0);
    check(full, "full after filling");
    cycle(1, 0);                              // write while full: dropped
    check(overflow, "overflow after write while full");
    while (model.size() > 0) cycle(0, 1);
    check(empty, "empty after draining");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
