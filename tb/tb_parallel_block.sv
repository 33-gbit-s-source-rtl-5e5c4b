// tb_parallel_block: self-checking test of one parallel block (buffer,
// Toeplitz extractor, FIFO) at the default size, driven the way the daisy
// chain drives it: a new 480-bit bus word every cycle and a read_enable
// pulse every 120 cycles (what the other 19 blocks take in between).
//
// Checks: buffer_full pulses exactly on the 6th word after each
// read_enable; the FIFO receives j/b = 53 words per block; every word read
// from the FIFO equals the Toeplitz hash of the 6 words the buffer took,
// computed here from the matrix definition; blocks are hashed back to back
// (block_done every 120 cycles); and no error flag is raised.
module tb_parallel_block;
  localparam int unsigned J = 1272, K = 2880, B = 24, BUS_W = 480;
  localparam int unsigned W = K / B, NOUT = J / B, BEATS = K / BUS_W;
  localparam int NBLK = 4;

  logic clk = 0, rst_n = 0;
  logic [J+K-1:0] seed;
  logic [BUS_W-1:0] s_data;
  logic s_valid, read_enable, buffer_full, fifo_rd, fifo_empty, block_done;
  logic [B-1:0] fifo_data;
  logic [2:0] err;
  int checks = 0, failures = 0, cyc = 0;
  logic [K-1:0] blk [NBLK];
  logic [J-1:0] ref_z [NBLK];
  int taken_blk = 0, beat = -1, re_cyc = 0, rd_blk = 0, rd_word = 0;
  int done_cyc [$];

  parallel_block #(.J(J), .K(K), .B(B), .BUS_W(BUS_W), .N_STAGES(3), .FIFO_DEPTH(128)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s at cycle %0d", what, cyc); end
  endtask

  function automatic logic [J-1:0] reference(logic [J+K-1:0] s, logic [K-1:0] d);
    logic [J-1:0] z = '0;
    int base;
    for (int c = 0; c < int'(K); c++)
      if (d[c]) begin
        base = B * (c / B) + (B - 1 - c % B);
        for (int r = 0; r < int'(J); r++) z[r] ^= s[base + r];
      end
    return z;
  endfunction

  // Bus source and chain model; record the words the buffer should take.
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (read_enable) beat = 0;
    else if (beat >= 0) begin
      if (taken_blk < NBLK) blk[taken_blk][beat*BUS_W +: BUS_W] = s_data;
      check(buffer_full == (beat == int'(BEATS) - 1), $sformatf("buffer_full at beat %0d", beat));
      if (beat == int'(BEATS) - 1) begin
        if (taken_blk < NBLK) ref_z[taken_blk] = reference(seed, blk[taken_blk]);
        taken_blk++;
        beat = -1;
      end else beat++;
    end else check(!buffer_full, "buffer_full outside collection");
    if (block_done) done_cyc.push_back(cyc);
  end
  always @(negedge clk) begin
    for (int i = 0; i < int'(BUS_W); i += 32) s_data[i +: 32] <= $urandom;
    read_enable <= rst_n && (cyc % int'(W) == 3) && (cyc / int'(W) < NBLK);
    fifo_rd <= !fifo_empty && ($urandom_range(0, 3) != 0);
  end

  // FIFO reader
  always @(posedge clk) if (rst_n && fifo_rd) begin
    if (rd_blk < taken_blk && rd_blk < NBLK)
      check(fifo_data == ref_z[rd_blk][rd_word*B +: B], $sformatf("block %0d word %0d", rd_blk, rd_word));
    else check(0, "FIFO word before its block was collected");
    rd_word++;
    if (rd_word == int'(NOUT)) begin rd_word = 0; rd_blk++; end
  end

  initial begin
    for (int i = 0; i < int'(J + K); i += 32) seed[i +: 32] = $urandom;
    s_valid = 1; read_enable = 0; fifo_rd = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    wait (rd_blk == NBLK);
    repeat (20) @(posedge clk);
    check(fifo_empty, "FIFO empty at the end");
    check(done_cyc.size() == NBLK, $sformatf("%0d blocks done", done_cyc.size()));
    for (int n = 1; n < done_cyc.size(); n++)
      check(done_cyc[n] - done_cyc[n-1] == int'(W), "blocks hashed back to back");
    check(err == '0, "error flags");
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
