// tb_pcie_cdc_channel: self-checking test of the clock-domain crossing to
// the PCIe stream (480-bit words at 160 MHz in, 512-bit words at 250 MHz
// out; the two clocks run at the same 16:25 ratio).
//
// The output bit stream must equal the input bit stream of accepted words,
// cut into 512-bit words. Phases: random source valid and random sink
// ready; sink stalled while the source keeps offering (words offered while
// s_ready is low must be counted in drop_count and must not appear at the
// output); a continuous source at the full 480 bits x 160 MHz with the sink
// always ready, where s_ready must never fall (the PCIe side has the
// bandwidth); and a final drain.
module tb_pcie_cdc_channel;
  localparam int unsigned IN_W = 480, OUT_W = 512;
  logic s_clk = 0, m_clk = 0, s_rst_n = 0, m_rst_n = 0;
  logic [IN_W-1:0] s_data;
  logic s_valid, s_ready;
  logic [31:0] drop_count;
  logic [OUT_W-1:0] m_axis_tdata;
  logic m_axis_tvalid, m_axis_tready;
  int checks = 0, failures = 0;
  bit bits [$];
  int in_words = 0, out_words = 0, drops = 0, cont_stalls = 0;
  int phase = 0;

  pcie_cdc_channel #(.IN_W(IN_W), .OUT_W(OUT_W), .DEPTH(16)) dut (.*);
  always #25 s_clk = ~s_clk;    // period 50 : 160 MHz
  always #16 m_clk = ~m_clk;    // period 32 : 250 MHz   (ratio 25:16)

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s at %0t", what, $time); end
  endtask

  // Source
  always @(posedge s_clk) if (s_rst_n) begin
    if (s_valid && s_ready) begin
      for (int i = 0; i < int'(IN_W); i++) bits.push_back(s_data[i]);
      in_words++;
    end
    if (s_valid && !s_ready) drops++;
    if (phase == 3 && s_valid && !s_ready) cont_stalls++;
  end
  always @(negedge s_clk) begin
    for (int i = 0; i < int'(IN_W); i += 32) s_data[i +: 32] <= $urandom;
    case (phase)
      1: s_valid <= ($urandom_range(0, 99) < 60);
      2, 3: s_valid <= 1;
      default: s_valid <= 0;
    endcase
  end

  // Sink
  always @(posedge m_clk) if (m_rst_n && m_axis_tvalid && m_axis_tready) begin
    logic [OUT_W-1:0] e;
    for (int i = 0; i < int'(OUT_W); i++) e[i] = bits.size() > i ? bits[i] : 1'b0;
    check(bits.size() >= int'(OUT_W) && m_axis_tdata == e, $sformatf("output word %0d", out_words));
    for (int i = 0; i < int'(OUT_W) && bits.size() > 0; i++) void'(bits.pop_front());
    out_words++;
  end
  always @(negedge m_clk)
    m_axis_tready <= (phase == 1) ? ($urandom_range(0, 99) < 80) : (phase != 2);

  initial begin
    s_valid = 0; m_axis_tready = 0; s_data = '0;
    #200 s_rst_n = 1; m_rst_n = 1;
    phase = 1; #(50 * 400);
    phase = 2; #(50 * 60);
    check(drop_count == 32'(drops) && drops > 0, $sformatf("drop_count %0d vs %0d", drop_count, drops));
    phase = 4; #(50 * 40);
    phase = 3; #(50 * 300);
    phase = 4; #(50 * 100);
    check(cont_stalls == 0, $sformatf("stalls at full input rate: %0d", cont_stalls));
    check(drop_count == 32'(drops), "drop_count final");
    check(out_words == (in_words * int'(IN_W)) / int'(OUT_W), $sformatf("words in %0d out %0d", in_words, out_words));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(50 * 5000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
