// Shared body of the end-to-end testbenches of qrng_top. The including
// module defines the localparams NB, SMP_W, J, K, L_W, LANES, NROT, the
// sink stall lengths RNG_STALL and RAW_STALL (cycles) and
// instantiates the design as `dut` on the signals declared here.
//
// Stimulus: two random 12-bit sample streams (CH1, CH2) packed densely
// into link words, links valid at the rate that matches the ADC (credit
// scheme), NROT full rotations of the block chain worth of data. The
// expected outputs are computed here independently of the design: the
// ADC word stream (word 0 is the one that raises start-chain, the chain
// starts on word 1), block m = the next k_in/480 words, its Toeplitz hash
// from the matrix definition, block m handled by parallel block m mod NB,
// the aggregated vector t = word t of every block FIFO (block 0 lowest),
// the PCIe words a dense re-cut of that bit stream. The raw channel must
// carry every ADC word it accepts, in order. Phases stall the extracted-data
// sink (back-pressure into the aggregator) and the raw sink (raw drops).
  localparam int unsigned B     = 2 * SMP_W;
  localparam int unsigned BW    = NB * B;
  localparam int unsigned CH_W  = NB * SMP_W;
  localparam int unsigned OUT_W = 512;
  localparam int unsigned BEATS = K / BW;
  localparam int unsigned W     = K / B;
  localparam int unsigned NOUT  = J / B;
  localparam int          NBLK  = NROT * NB;
  localparam int          NADC  = 1 + NBLK * BEATS;           // ADC words needed

  logic clk = 0, rst_n = 0, pcie_clk = 0, pcie_rst_n = 0;
  logic [1:0][L_W-1:0] link_data;
  logic [1:0] link_valid;
  logic [J+K-1:0] seed;
  logic [OUT_W-1:0] m_axis_rng_tdata, m_axis_raw_tdata;
  logic m_axis_rng_tvalid, m_axis_rng_tready, m_axis_raw_tvalid, m_axis_raw_tready;
  logic err_overflow;
  logic [31:0] raw_drop_count;

  int checks = 0, failures = 0, cyc = 0;
  logic [SMP_W-1:0] ch1 [$], ch2 [$];
  bit   rng_bits [$];
  bit   raw_bits [$];
  int   adc_words = 0, rng_words = 0, raw_words = 0;
  int   n_start = 0, n_wrap = 0, n_init = 0, n_reload = 0, n_swap = 0,
        n_agg_wait = 0, n_agg_stall = 0, n_link_idle = 0, n_blocks = 0,
        n_window = 0;
  int   last_done0 = -1, period_errs = 0;
  int   phase = 0;

  always #25 clk = ~clk;          // 160 MHz : 250 MHz = 16 : 25
  always #16 pcie_clk = ~pcie_clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s at cycle %0d", what, cyc); end
  endtask

  function automatic logic [BW-1:0] adc_word(int w);
    logic [BW-1:0] v;
    logic [SMP_W-1:0] a, b;
    int idx;
    for (int s = 0; s < int'(NB); s++) begin
      idx = w * int'(NB) + s;
      a = ch1[idx];
      b = ch2[idx];
      v[s*B +: B] = {b, a};
    end
    return v;
  endfunction

  function automatic logic [J-1:0] toeplitz_ref(logic [J+K-1:0] s, logic [K-1:0] d);
    logic [J-1:0] z = '0;
    int base;
    for (int c = 0; c < int'(K); c++)
      if (d[c]) begin
        base = int'(B) * (c / int'(B)) + (int'(B) - 1 - c % int'(B));
        for (int r = 0; r < int'(J); r++) z[r] ^= s[base + r];
      end
    return z;
  endfunction

  function automatic logic [L_W-1:0] link_word(int ch, int w);
    logic [L_W-1:0] v;
    logic [SMP_W-1:0] sv;
    int bitpos, idx, off;
    for (int i = 0; i < int'(L_W); i++) begin
      bitpos = w * int'(L_W) + i;
      idx = bitpos / int'(SMP_W);
      off = bitpos % int'(SMP_W);
      if (ch == 0) sv = ch1[idx];
      else         sv = ch2[idx];
      v[i] = sv[off];
    end
    return v;
  endfunction

  // Stimulus and expected extracted stream
  int n_link;
  initial begin
    logic [K-1:0] d;
    logic [J-1:0] z [NBLK];
    int credit;
    for (int i = 0; i < int'(J + K); i += 32) seed[i +: 32] = $urandom;
    n_link = (NADC * int'(CH_W) + int'(L_W) - 1) / int'(L_W);
    for (int i = 0; i < (n_link * int'(L_W)) / int'(SMP_W) + 1; i++) begin
      ch1.push_back(SMP_W'($urandom));
      ch2.push_back(SMP_W'($urandom));
    end
    for (int m = 0; m < NBLK; m++) begin
      for (int b = 0; b < int'(BEATS); b++) d[b*BW +: BW] = adc_word(1 + m * int'(BEATS) + b);
      z[m] = toeplitz_ref(seed, d);
    end
    for (int t = 0; t < NROT * int'(NOUT); t++)
      for (int n = 0; n < int'(NB); n++)
        for (int i = 0; i < int'(B); i++)
          rng_bits.push_back(z[n + int'(NB) * (t / int'(NOUT))][(t % int'(NOUT)) * int'(B) + i]);
    link_valid = 0; link_data = '0;
    m_axis_rng_tready = 1; m_axis_raw_tready = 1;
    repeat (3) @(posedge clk);
    #1 rst_n = 1; pcie_rst_n = 1;
    repeat (4) @(posedge clk); #1;
    credit = int'(L_W);
    for (int w = 0; w < n_link; ) begin
      if (credit >= int'(L_W)) begin
        link_valid = 2'b11;
        link_data[0] = link_word(0, w);
        link_data[1] = link_word(1, w);
        credit -= int'(L_W);
        w++;
      end else link_valid = 2'b00;
      credit += int'(CH_W);
      @(posedge clk); #1;
    end
    link_valid = 0;
  end

  // Sink stalls: extracted-data sink during rotation 1, raw sink during rotation 2
  always @(negedge pcie_clk) begin
    m_axis_rng_tready <= !(cyc >= 2 * int'(W) && cyc < 2 * int'(W) + RNG_STALL);
    m_axis_raw_tready <= !(cyc >= int'(W) && cyc < int'(W) + RAW_STALL);
  end

  // Mechanism counters and raw reference (160 MHz side)
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (dut.start_chain) n_start++;
    if (dut.buffer_full[NB-1]) n_wrap++;
    if (dut.g_blk[0].u_blk.u_extract.init_q) n_init++;
    if (dut.g_blk[0].u_blk.u_extract.proc_done) n_reload++;
    if (dut.g_blk[0].u_blk.u_buffer.pending_q && dut.g_blk[0].u_blk.u_buffer.d_valid &&
        dut.g_blk[0].u_blk.u_buffer.d_release) n_swap++;
    if (!(&(~dut.fifo_empty)) && (|(~dut.fifo_empty))) n_agg_wait++;
    if (dut.agg_valid && !dut.agg_ready) n_agg_stall++;
    if (link_valid == 2'b00) n_link_idle++;
    n_blocks += $countones(dut.block_done);
    if (cyc >= 2 * int'(W) + 20 && cyc < 3 * int'(W) + 20) n_window += $countones(dut.block_done);
    if (dut.block_done[0]) begin
      if (last_done0 >= 0 && cyc - last_done0 != int'(W)) period_errs++;
      last_done0 = cyc;
    end
    if (dut.adc_valid) begin
      if (dut.u_raw_cdc.s_ready) begin
        logic [BW-1:0] v;
        v = adc_word(adc_words);
        check(dut.adc_data == v, $sformatf("ADC word %0d got %h exp %h", adc_words, dut.adc_data, v));
        for (int i = 0; i < int'(BW); i++) raw_bits.push_back(v[i]);
      end
      adc_words++;
    end
  end

  // PCIe side checks
  always @(posedge pcie_clk) if (pcie_rst_n) begin
    if (m_axis_rng_tvalid && m_axis_rng_tready) begin
      logic [OUT_W-1:0] e;
      for (int i = 0; i < int'(OUT_W); i++) e[i] = (rng_bits.size() > i) ? rng_bits[i] : 1'b0;
      check(rng_bits.size() >= int'(OUT_W) && m_axis_rng_tdata == e, $sformatf("extracted PCIe word %0d", rng_words));
      for (int i = 0; i < int'(OUT_W) && rng_bits.size() > 0; i++) void'(rng_bits.pop_front());
      rng_words++;
    end
    if (m_axis_raw_tvalid && m_axis_raw_tready) begin
      logic [OUT_W-1:0] e;
      for (int i = 0; i < int'(OUT_W); i++) e[i] = (raw_bits.size() > i) ? raw_bits[i] : 1'b0;
      check(raw_bits.size() >= int'(OUT_W) && m_axis_raw_tdata == e, $sformatf("raw PCIe word %0d", raw_words));
      for (int i = 0; i < int'(OUT_W) && raw_bits.size() > 0; i++) void'(raw_bits.pop_front());
      raw_words++;
    end
  end

  initial begin
    int exp_words;
    exp_words = (NBLK * int'(J)) / int'(OUT_W);
    wait (rst_n);
    wait (rng_words >= exp_words || cyc >= (NROT + 4) * int'(W) + 400);
    repeat (20) @(posedge clk);
    check(rng_words == exp_words, $sformatf("extracted PCIe words %0d, expected %0d", rng_words, exp_words));
    check(n_blocks >= NBLK, $sformatf("blocks hashed %0d of %0d", n_blocks, NBLK));
    // net rate: NB blocks of j bits per k_in/b cycles (33.92 Gbit/s at 160 MHz)
    check(n_window == int'(NB), $sformatf("blocks finished in one k_in/b-cycle window: %0d", n_window));
    check(period_errs == 0, "block 0 hashed back to back every k_in/b cycles");
    check(!err_overflow, "datapath overflow flag");
    check(raw_words > 0, "raw words delivered");
    // every mechanism must have happened
    check(n_start == 1, $sformatf("start-chain pulses %0d", n_start));
    check(n_wrap >= NROT, $sformatf("chain wraps %0d", n_wrap));
    check(n_init >= 1, "Toeplitz init");
    check(n_reload >= NROT, $sformatf("look-ahead reloads %0d", n_reload));
    check(n_swap >= 1, $sformatf("back-to-back buffer hand-overs %0d", n_swap));
    check(n_agg_wait >= 1, "aggregator waiting for a FIFO");
    check(n_agg_stall >= 1, "aggregator back-pressure from the PCIe side");
    check(raw_drop_count > 0, "raw words dropped while the raw sink stalls");
    check(n_link_idle >= 1, "link idle cycles");
    $display("mechanisms: start=%0d wrap=%0d init=%0d reload=%0d swap=%0d agg_wait=%0d agg_stall=%0d raw_drop=%0d link_idle=%0d blocks=%0d",
             n_start, n_wrap, n_init, n_reload, n_swap, n_agg_wait, n_agg_stall, raw_drop_count, n_link_idle, n_blocks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat ((NROT + 8) * int'(W) + 1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
