// tb_block_buffer: self-checking test of the per-block input buffer at its
// default size (k_in = 2880 bits = 6 beats of 480 bits).
//
// Checks that no data is taken before read_enable, that exactly the next
// 6 valid bus words (gaps in s_valid skipped) form the block in order,
// that buffer_full is a one-cycle pulse on the 6th word, that the block
// appears in D two cycles later, that a waiting block replaces D in the
// same cycle as d_release (no gap), that d_valid falls on a release with
// nothing waiting, and that the overrun flag is raised when a finished
// collection cannot move into D before the next one completes.
module tb_block_buffer;
  localparam int unsigned K = 2880, BUS_W = 480, BEATS = K / BUS_W;

  logic clk = 0, rst_n = 0;
  logic [BUS_W-1:0] s_data;
  logic s_valid, read_enable, buffer_full, d_valid, d_release, overrun;
  logic [K-1:0] d_block;

  int checks = 0, failures = 0;
  block_buffer #(.K(K), .BUS_W(BUS_W)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s at %0t", what, $time); end
  endtask

  function automatic logic [BUS_W-1:0] rnd_word();
    logic [BUS_W-1:0] w;
    for (int i = 0; i < int'(BUS_W); i += 32) w[i +: 32] = $urandom;
    return w;
  endfunction

  // Drive one cycle; returns buffer_full as seen before the clock edge.
  task automatic step(bit v, logic [BUS_W-1:0] d, bit re, bit rel, output bit full_seen);
    s_valid = v; s_data = d; read_enable = re; d_release = rel;
    #1 full_seen = buffer_full;
    @(posedge clk); #1;
    s_valid = 0; read_enable = 0; d_release = 0;
  endtask

  // Collect one block: read_enable pulse then BEATS valid words with gaps.
  task automatic collect(output logic [K-1:0] exp, input bit rel_at_end);
    bit f;
    step(1, rnd_word(), 1, 0, f);           // word offered with read_enable: not taken
    check(!f, "full during read_enable cycle");
    for (int b = 0; b < int'(BEATS); b++) begin
      logic [BUS_W-1:0] w = rnd_word();
      if (b == 2) begin step(0, rnd_word(), 0, 0, f); check(!f, "full on idle cycle"); end
      exp[b*BUS_W +: BUS_W] = w;
      step(1, w, 0, (b == int'(BEATS) - 1) && rel_at_end, f);
      check(f == (b == int'(BEATS) - 1), $sformatf("buffer_full on beat %0d = %0b", b, f));
    end
    step(1, rnd_word(), 0, 0, f);           // after full: nothing taken
    check(!f, "full after completion");
  endtask

  logic [K-1:0] blk1, blk2, blk3, blk4, blk5;
  bit f;
  initial begin
    s_valid = 0; read_enable = 0; d_release = 0; s_data = '0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    repeat (3) step(1, rnd_word(), 0, 0, f);     // ignored: no read enable yet
    check(!d_valid, "d_valid before any collection");
    collect(blk1, 0);
    check(d_valid && d_block == blk1, "block 1 in D");
    collect(blk2, 0);                            // D still busy: block 2 waits
    check(d_valid && d_block == blk1, "D keeps block 1 while busy");
    step(0, '0, 0, 1, f);                        // release: block 2 moves in
    check(d_valid && d_block == blk2, "block 2 swapped in on release");
    step(0, '0, 0, 1, f);                        // release with nothing waiting
    check(!d_valid, "d_valid falls after release");
    check(!overrun, "no overrun so far");
    collect(blk3, 0);
    check(d_valid && d_block == blk3, "block 3 in D");
    collect(blk4, 0);
    collect(blk5, 0);                            // block 4 still waiting
    check(overrun, "overrun flagged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
