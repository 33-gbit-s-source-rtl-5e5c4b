// tb_transport_layer: self-checking test of the JESD204C transport layer.
//
// Two random streams of 12-bit samples (CH1, CH2) are packed densely into
// 256-bit link words, and the eight 32-bit lanes of every word are
// scrambled according to a non-identity lane map (the lane map under test
// must undo it). Links are valid 15 cycles in 16, the rate at which 256-bit
// words carry 240 bits of samples per cycle, with a few extra idle cycles
// and, in a second phase, link 1 one cycle late. Checks: every 24-bit round
// of every 480-bit output word is {CH2 sample, CH1 sample} in stream order,
// output words come every cycle in steady state, and no overflow occurs.
module tb_transport_layer;
  localparam int unsigned NS = 20, SW = 12, LW = 256, LANES = 8, LANE_W = LW / LANES;
  localparam logic [LANES*3-1:0] MAP = {3'd0, 3'd1, 3'd2, 3'd3, 3'd4, 3'd5, 3'd6, 3'd7} ^ {LANES{3'd2}};
  localparam int NWORDS = 480;                      // link words per channel

  logic clk = 0, rst_n = 0;
  logic [1:0][LW-1:0] link_data;
  logic [1:0] link_valid;
  logic [NS*2*SW-1:0] m_data;
  logic m_valid, overflow;
  int checks = 0, failures = 0, cyc = 0;
  logic [SW-1:0] smp0 [$], smp1 [$];
  int out_smp = 0, steady_out = 0;

  transport_layer #(.N_SMP(NS), .SMP_W(SW), .L_W(LW), .LANES(LANES), .LANE_MAP(MAP)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s at %0t", what, $time); end
  endtask

  // Dense sample stream of one channel, cut into link words.
  function automatic logic [LW-1:0] link_word(int ch, int w);
    logic [LW-1:0] v;
    logic [SW-1:0] sv;
    int bitpos, idx, off;
    for (int i = 0; i < 256; i++) begin
      bitpos = w * 256 + i;
      idx = bitpos / 12;
      off = bitpos % 12;
      if (ch == 0) sv = smp0[idx];
      else         sv = smp1[idx];
      v[i] = sv[off];
    end
    return v;
  endfunction

  // Physical lane MAP[l] carries logical lane l.
  function automatic logic [LW-1:0] scramble(logic [LW-1:0] v);
    logic [LW-1:0] p;
    for (int l = 0; l < int'(LANES); l++) p[MAP[l*3 +: 3]*LANE_W +: LANE_W] = v[l*LANE_W +: LANE_W];
    return p;
  endfunction

  initial begin
    int w0 = 0, w1 = 0;
    bit v, v0, v1;
    for (int i = 0; i < (NWORDS * int'(LW)) / int'(SW) + 1; i++) begin
      smp0.push_back(SW'($urandom));
      smp1.push_back(SW'($urandom));
    end
    link_valid = 0; link_data = '0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    // phase 1: aligned links, valid 15 of 16 cycles, extra idles
    for (int c = 0; w0 < NWORDS / 2; c++) begin
      v = (c % 16 != 15) && !(c == 100 || c == 101);
      link_valid = {v, v};
      if (v) begin link_data[0] = scramble(link_word(0, w0++)); link_data[1] = scramble(link_word(1, w1++)); end
      @(posedge clk); #1;
    end
    // phase 2: link 1 one cycle behind link 0
    for (int c = 0; w1 < NWORDS; c++) begin
      v0 = (c % 16 != 15) && w0 < NWORDS;
      v1 = c > 0 && ((c - 1) % 16 != 15);
      link_valid = {v1, v0};
      if (v0) link_data[0] = scramble(link_word(0, w0++));
      if (v1) link_data[1] = scramble(link_word(1, w1++));
      @(posedge clk); #1;
    end
    link_valid = 0;
    repeat (10) @(posedge clk);
    check(out_smp == (NWORDS * int'(LW)) / int'(SW) / int'(NS) * int'(NS),
          $sformatf("samples out %0d", out_smp));
    check(steady_out >= 250, $sformatf("steady-state words %0d of 256 cycles", steady_out));
    check(!overflow, "overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && m_valid) begin
    for (int s = 0; s < int'(NS); s++)
      check(m_data[s*2*SW +: 2*SW] == {smp1[out_smp + s], smp0[out_smp + s]},
            $sformatf("round %0d got %h exp %h", out_smp + s, m_data[s*2*SW +: 2*SW], {smp1[out_smp + s], smp0[out_smp + s]}));
    out_smp += NS;
    if (cyc >= 40 && cyc < 296) steady_out++;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
