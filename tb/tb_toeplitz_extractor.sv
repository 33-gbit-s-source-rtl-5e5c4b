// tb_toeplitz_extractor: self-checking test of the pipelined Toeplitz
// extractor at its default size (j = 1272, k_in = 2880, b = 24).
//
// A behavioural block source offers random k_in-bit blocks: the first three
// back to back (the next block is ready in the cycle the previous one is
// released), then one after a gap of idle cycles. Every b-bit output piece
// is compared with a reference computed here straight from the matrix
// definition, Z[r] = XOR_c seed[b*(c/b) + (b-1-c%b) + r] & D[c]. Timing
// checks: a block is consumed in exactly k_in/b cycles when blocks are
// back to back, the first output piece of a block comes 6 cycles after its
// last word was loaded, and its j/b pieces come on consecutive cycles.
module tb_toeplitz_extractor;
  localparam int unsigned J = 1272, K = 2880, B = 24;
  localparam int unsigned W = K / B, NOUT = J / B;
  localparam int NBLK = 5;

  logic clk = 0, rst_n = 0;
  logic [J+K-1:0] seed;
  logic [K-1:0]   d_block;
  logic           d_valid, d_release;
  logic [B-1:0]   out_data;
  logic           out_valid, block_done, out_collision;

  int checks = 0, failures = 0;
  int cyc = 0;
  logic [K-1:0] blocks [NBLK];
  logic [J-1:0] ref_z  [NBLK];

  toeplitz_extractor #(.J(J), .K(K), .B(B), .N_STAGES(3)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic logic [J-1:0] reference(logic [J+K-1:0] s, logic [K-1:0] d);
    logic [J-1:0] z = '0;
    for (int c = 0; c < int'(K); c++)
      if (d[c]) begin
        int base = B * (c / B) + (B - 1 - c % B);
        for (int r = 0; r < int'(J); r++) z[r] ^= s[base + r];
      end
    return z;
  endfunction

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (cycle %0d)", what, cyc);
    end
  endtask

  // Block source
  int src_blk = 0;
  int rel_cyc [NBLK];
  initial begin
    for (int i = 0; i < int'(J + K); i += 32) seed[i +: 32] = $urandom;
    for (int n = 0; n < NBLK; n++) begin
      for (int i = 0; i < int'(K); i += 32) blocks[n][i +: 32] = $urandom;
      if (n == 2) blocks[n] = '0;             // all-zero block hashes to zero
      ref_z[n] = reference(seed, blocks[n]);
    end
    d_valid = 0; d_block = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    #1;
    d_block = blocks[0]; d_valid = 1;
    while (src_blk < NBLK) begin
      @(posedge clk);
      if (d_release) begin
        rel_cyc[src_blk] = cyc;
        src_blk++;
        #1;
        if (src_blk == 3) begin               // gap before block 3
          d_valid = 0;
          repeat (17) @(posedge clk);
          #1;
        end
        if (src_blk < NBLK) begin d_block = blocks[src_blk]; d_valid = 1; end
        else d_valid = 0;
      end
    end
  end

  // Output checker
  int out_blk = 0, out_piece = 0, last_out_cyc = 0;
  always @(posedge clk) if (rst_n && out_valid) begin
    if (out_blk < NBLK) begin
      check(out_data == ref_z[out_blk][out_piece*B +: B],
            $sformatf("block %0d piece %0d: got %h exp %h", out_blk, out_piece,
                      out_data, ref_z[out_blk][out_piece*B +: B]));
      if (out_piece == 0)
        check(cyc - rel_cyc[out_blk] == 6,
              $sformatf("block %0d first piece %0d cycles after release", out_blk, cyc - rel_cyc[out_blk]));
      else
        check(cyc == last_out_cyc + 1, "output pieces not on consecutive cycles");
      last_out_cyc = cyc;
      out_piece++;
      if (out_piece == int'(NOUT)) begin out_piece = 0; out_blk++; end
    end else check(0, "extra output");
  end

  initial begin
    wait (out_blk == NBLK);
    repeat (10) @(posedge clk);
    // back-to-back blocks are consumed in exactly W cycles each
    check(rel_cyc[1] - rel_cyc[0] == int'(W), $sformatf("block period %0d", rel_cyc[1] - rel_cyc[0]));
    check(rel_cyc[2] - rel_cyc[1] == int'(W), "block period 1->2");
    check(rel_cyc[4] - rel_cyc[3] == int'(W), "block period 3->4");
    check(!out_collision, "output stage collision");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
