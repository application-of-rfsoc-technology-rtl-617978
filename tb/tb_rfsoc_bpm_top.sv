// tb_rfsoc_bpm_top -- end-to-end testbench of the readout firmware at its
// default sizes (76-word injection buffer, 509-word live buffer, 512-word DAC
// memories).
//
// The ADC inputs carry a synthetic two-bunch injection: for each injection
// the four channels see two identical bursts, 391 samples (96 ns at
// 4.072 GSPS) apart, each 285 samples (70 ns) long, a decaying 509 MHz
// oscillation with a channel-dependent amplitude, on top of a small
// deterministic noise pattern. Every sample is a known function of its
// absolute index, so every captured word can be predicted.
//
// The test drives the design only through its ports, as the processing
// system and accelerator would: it configures the trigger delay over
// AXI-Lite, raises the injection trigger shortly before each injection, asks
// for live-display captures through the LIVE_REQ register, and acts as the
// DMA by accepting the two streams with random stalls. Checked:
//   * every beat of every frame (data, channel in TDEST, TLAST), with
//     the capture window ending exactly at the delayed trigger;
//   * both bunches lie inside the 300 ns injection window, their integrals of
//     |signal| (the quantity the position fit uses) agree, and the 96 ns gap
//     between them holds only noise;
//   * readout time of a capture when the DMA never stalls;
//   * dropped injection triggers (buffer busy), dropped live requests,
//     ignored triggers (disabled), and the status counters read over AXI-Lite;
//   * DAC playback of two waveforms loaded over AXI-Lite, with two loop
//     lengths.
// Each of these mechanisms is counted; one that never happened is a failure.
module tb_rfsoc_bpm_top;
  import bpm_pkg::*;

  localparam int unsigned ADC_W   = ADC_SPC * SAMPLE_W;
  localparam int unsigned DAC_W   = DAC_SPC * SAMPLE_W;
  localparam int unsigned CH_W    = $clog2(NUM_ADC);
  localparam int unsigned LANES   = DAC_SPC / 2;
  localparam int unsigned NPAIR   = DAC_DEPTH * LANES;

  // two-bunch signal shape (samples)
  localparam int BUNCH_SPACING = 391;   // 96 ns at 4.072 GSPS
  localparam int BUNCH_LEN     = 285;   // 70 ns
  localparam int TRIG_DELAY    = 55;    // fabric cycles
  localparam int BEAM_AFTER_TRIG = 5;   // words from trigger edge to first bunch

  logic                          clk = 1'b0;
  logic                          rst;
  logic                          adc_valid;
  logic [NUM_ADC-1:0][ADC_W-1:0] adc_data;
  logic [NUM_DAC-1:0][DAC_W-1:0] dac_data;
  logic                          inj_trig;
  logic                          inj_axis_tvalid, inj_axis_tready, inj_axis_tlast;
  logic [ADC_W-1:0]              inj_axis_tdata;
  logic [CH_W-1:0]               inj_axis_tdest;
  logic                          live_axis_tvalid, live_axis_tready, live_axis_tlast;
  logic [ADC_W-1:0]              live_axis_tdata;
  logic [CH_W-1:0]               live_axis_tdest;
  logic [AXIL_ADDR_W-1:0]        s_axil_awaddr, s_axil_araddr;
  logic                          s_axil_awvalid, s_axil_awready, s_axil_wvalid, s_axil_wready;
  logic [31:0]                   s_axil_wdata, s_axil_rdata;
  logic [3:0]                    s_axil_wstrb;
  logic [1:0]                    s_axil_bresp, s_axil_rresp;
  logic                          s_axil_bvalid, s_axil_bready;
  logic                          s_axil_arvalid, s_axil_arready, s_axil_rvalid, s_axil_rready;

  rfsoc_bpm_top dut (.*);

  always #2 clk = ~clk;

  int unsigned checks = 0, failures = 0;
  int          cycle = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 30) $display("FAIL @%0d: %s", cycle, what);
    end
  endtask

  // ------------------------------------------------------------------
  // ADC signal model
  // ------------------------------------------------------------------
  int bunch_starts [$];   // first sample of the first bunch of each injection
  const int amp [NUM_ADC] = '{6000, 9000, 12000, 3000};
  const int osc [8] = '{0, 71, 100, 71, 0, -71, -100, -71};

  function automatic int sample_val(int c, longint n);
    int v;
    v = int'((n * 7) % 5) - 2;
    foreach (bunch_starts[k]) begin
      for (int b = 0; b < 2; b++) begin
        longint d;
        d = n - longint'(bunch_starts[k]) - b * BUNCH_SPACING;
        if (d >= 0 && d < BUNCH_LEN)
          v += amp[c] * osc[int'(d % 8)] * (BUNCH_LEN - int'(d)) / (100 * BUNCH_LEN);
      end
    end
    return v;
  endfunction

  function automatic logic [ADC_W-1:0] adc_word(int c, int w);
    logic [ADC_W-1:0] r;
    for (int s = 0; s < ADC_SPC; s++)
      r[s*SAMPLE_W +: SAMPLE_W] = SAMPLE_W'(sample_val(c, longint'(w) * ADC_SPC + s));
    return r;
  endfunction

  // word `cycle` is on adc_data at clock edge `cycle`
  always @(negedge clk) begin
    for (int c = 0; c < NUM_ADC; c++) adc_data[c] <= adc_word(c, cycle);
  end

  // ------------------------------------------------------------------
  // DMA side: stream checkers
  // ------------------------------------------------------------------
  int  inj_newest [$], live_newest [$];
  int  inj_beat = 0, live_beat = 0;
  int  inj_caps = 0, live_caps = 0;
  int  stall_cycles = 0, concurrent_cycles = 0;
  int  inj_freeze_cycle = 0, inj_done_cycle = 0;
  bit  inj_expect = 0, live_expect = 0;
  bit  prev_trig = 0;
  logic [ADC_W-1:0] last_inj [NUM_ADC][$];   // words of the last injection capture
  int  last_inj_first;

  // DAC model
  logic [31:0] dac_mem [NUM_DAC][NPAIR];
  int          dac_en_edge [NUM_DAC];
  bit          dac_en [NUM_DAC];
  int          dac_last = 0;
  int          dac_wraps = 0, dac_words_checked = 0;

  function automatic logic [DAC_W-1:0] dac_word(int ch, int w);
    logic [DAC_W-1:0] r;
    for (int l = 0; l < LANES; l++) r[l*32 +: 32] = dac_mem[ch][w*LANES + l];
    return r;
  endfunction

  always @(posedge clk) begin
    if (!rst) begin
      // injection trigger: freeze expected D + 4 edges after first seen
      if (inj_trig && !prev_trig && inj_expect) begin
        inj_newest.push_back(cycle + TRIG_DELAY + 4);
        inj_expect = 0;
      end
      // live request write: freeze one edge after the write is taken
      if (s_axil_awvalid && s_axil_awready && s_axil_awaddr == AXIL_ADDR_W'(REG_LIVE_REQ) &&
          s_axil_wdata[0] && live_expect) begin
        live_newest.push_back(cycle + 1);
        live_expect = 0;
      end
      // control write: DAC enables take effect one edge later
      if (s_axil_awvalid && s_axil_awready && s_axil_awaddr == AXIL_ADDR_W'(REG_CONTROL)) begin
        for (int c = 0; c < NUM_DAC; c++) begin
          if (s_axil_wdata[1 + c] && !dac_en[c]) dac_en_edge[c] = cycle + 1;
          dac_en[c] = s_axil_wdata[1 + c];
        end
      end
      if (s_axil_awvalid && s_axil_awready && s_axil_awaddr == AXIL_ADDR_W'(REG_DAC_LEN))
        dac_last = int'(s_axil_wdata[8:0]);

      if (inj_axis_tvalid && !inj_axis_tready) stall_cycles++;
      if (live_axis_tvalid && !live_axis_tready) stall_cycles++;
      if (inj_axis_tvalid && live_axis_tvalid) concurrent_cycles++;

      // injection stream
      if (inj_axis_tvalid && inj_axis_tready) begin
        if (inj_newest.size() == 0) begin
          check(0, "unexpected injection beat");
        end else begin
          int ch, w;
          ch = inj_beat / INJ_DEPTH;
          w  = inj_newest[0] - INJ_DEPTH + 1 + inj_beat % INJ_DEPTH;
          if (inj_beat == 0) begin
            for (int c = 0; c < NUM_ADC; c++) last_inj[c].delete();
            last_inj_first = inj_newest[0] - INJ_DEPTH + 1;
            inj_freeze_cycle = inj_newest[0];
          end
          last_inj[ch].push_back(inj_axis_tdata);
          check(inj_axis_tdata == adc_word(ch, w), $sformatf("inj data ch%0d word %0d", ch, w));
          check(inj_axis_tdest == CH_W'(ch), "inj tdest");
          check(inj_axis_tlast == (inj_beat % INJ_DEPTH == INJ_DEPTH - 1), "inj tlast");
          inj_beat++;
          if (inj_beat == NUM_ADC * INJ_DEPTH) begin
            inj_beat = 0;
            void'(inj_newest.pop_front());
            inj_caps++;
            inj_done_cycle = cycle;
          end
        end
      end
      // live stream
      if (live_axis_tvalid && live_axis_tready) begin
        if (live_newest.size() == 0) begin
          check(0, "unexpected live beat");
        end else begin
          int ch, w;
          ch = live_beat / LIVE_DEPTH;
          w  = live_newest[0] - LIVE_DEPTH + 1 + live_beat % LIVE_DEPTH;
          check(live_axis_tdata == adc_word(ch, w), $sformatf("live data ch%0d word %0d", ch, w));
          check(live_axis_tdest == CH_W'(ch), "live tdest");
          check(live_axis_tlast == (live_beat % LIVE_DEPTH == LIVE_DEPTH - 1), "live tlast");
          live_beat++;
          if (live_beat == NUM_ADC * LIVE_DEPTH) begin
            live_beat = 0;
            void'(live_newest.pop_front());
            live_caps++;
          end
        end
      end
      // DAC outputs
      for (int c = 0; c < NUM_DAC; c++) begin
        if (dac_en[c] && cycle >= dac_en_edge[c] + 2) begin
          int w;
          w = (cycle - dac_en_edge[c] - 2) % (dac_last + 1);
          if (w == 0 && cycle > dac_en_edge[c] + 2) dac_wraps++;
          check(dac_data[c] == dac_word(c, w), $sformatf("dac ch%0d word %0d", c, w));
          dac_words_checked++;
        end
      end
      prev_trig = inj_trig;
    end
    cycle = cycle + 1;
  end

  // ------------------------------------------------------------------
  // AXI-Lite master
  // ------------------------------------------------------------------
  task automatic axil_write(input logic [AXIL_ADDR_W-1:0] addr, input logic [31:0] data);
    @(negedge clk);
    s_axil_awaddr = addr; s_axil_awvalid = 1'b1;
    s_axil_wdata = data;  s_axil_wvalid = 1'b1; s_axil_wstrb = 4'hF;
    s_axil_bready = 1'b1;
    do @(posedge clk); while (!(s_axil_awready && s_axil_wready));
    @(negedge clk);
    s_axil_awvalid = 1'b0; s_axil_wvalid = 1'b0;
    while (!s_axil_bvalid) @(negedge clk);
    check(s_axil_bresp == 2'b00, $sformatf("write %h resp", addr));
    @(negedge clk);
  endtask

  task automatic axil_read(input logic [AXIL_ADDR_W-1:0] addr, output logic [31:0] data);
    @(negedge clk);
    s_axil_araddr = addr; s_axil_arvalid = 1'b1; s_axil_rready = 1'b1;
    do @(posedge clk); while (!s_axil_arready);
    @(negedge clk);
    s_axil_arvalid = 1'b0;
    while (!s_axil_rvalid) @(negedge clk);
    data = s_axil_rdata;
    check(s_axil_rresp == 2'b00, $sformatf("read %h resp", addr));
    @(negedge clk);
  endtask

  task automatic expect_reg(input reg_addr_e a, input int exp, input string what);
    logic [31:0] d;
    axil_read(AXIL_ADDR_W'(a), d);
    check(d == 32'(exp), $sformatf("%s = %0d, expected %0d", what, d, exp));
  endtask

  // One injection: trigger first, beam BEAM_AFTER_TRIG words later
  task automatic inject(output int start);
    @(negedge clk);
    start = (cycle + BEAM_AFTER_TRIG) * ADC_SPC + 3;
    bunch_starts.push_back(start);
    if (bunch_starts.size() > 4) void'(bunch_starts.pop_front());
    inj_trig = 1'b1;
    repeat (4) @(negedge clk);
    inj_trig = 1'b0;
  endtask

  task automatic wait_idle(input int max_cycles);
    int n = 0;
    while ((inj_newest.size() != 0 || live_newest.size() != 0) && n < max_cycles) begin
      @(negedge clk);
      n++;
    end
    check(inj_newest.size() == 0 && live_newest.size() == 0, "captures finished");
  endtask

  // DMA acceptance pattern
  bit random_ready = 0;
  always @(negedge clk) begin
    inj_axis_tready  <= random_ready ? ($urandom_range(0, 9) < 7) : 1'b1;
    live_axis_tready <= random_ready ? ($urandom_range(0, 9) < 6) : 1'b1;
  end

  // Check that the last injection capture holds both bunches, separated
  int unsigned bunch_checks = 0;
  function automatic int iabs(int v);
    return (v < 0) ? -v : v;
  endfunction

  task automatic check_two_bunches(input int s0);
    int base;
    base = last_inj_first * ADC_SPC;   // sample index of first captured sample
    for (int c = 0; c < NUM_ADC; c++) begin
      longint i1 = 0, i2 = 0;
      int gap_max = 0;
      for (int k = 0; k < INJ_DEPTH * ADC_SPC; k++) begin
        int n, v, d;
        n = base + k;
        v = int'($signed(last_inj[c][k / ADC_SPC][(k % ADC_SPC)*SAMPLE_W +: SAMPLE_W]));
        d = n - s0;
        if (d >= 0 && d < BUNCH_LEN) i1 += iabs(v);
        else if (d >= BUNCH_SPACING && d < BUNCH_SPACING + BUNCH_LEN) i2 += iabs(v);
        else if (d >= BUNCH_LEN && d < BUNCH_SPACING && iabs(v) > gap_max) gap_max = iabs(v);
      end
      check(s0 >= base && s0 + BUNCH_SPACING + BUNCH_LEN <= base + INJ_DEPTH * ADC_SPC,
            $sformatf("ch%0d: both bunches inside the window", c));
      check(i1 > 10 * longint'(amp[c]) && (i1 - i2) * 100 < i1 && (i2 - i1) * 100 < i1,
            $sformatf("ch%0d: bunch integrals %0d / %0d", c, i1, i2));
      check(gap_max <= 2, $sformatf("ch%0d: gap between bunches holds only noise (%0d)", c, gap_max));
      bunch_checks++;
    end
  endtask

  // ------------------------------------------------------------------
  // Sequence
  // ------------------------------------------------------------------
  initial begin
    logic [31:0] d;
    int trig_acc = 0, trig_ign = 0, inj_drop = 0, live_drop = 0;
    int readout_cycles;
    int s_a, s_b;
    rst = 1'b1; adc_valid = 1'b1; inj_trig = 1'b0;
    s_axil_awaddr = '0; s_axil_awvalid = 1'b0; s_axil_wdata = '0; s_axil_wstrb = '0;
    s_axil_wvalid = 1'b0; s_axil_bready = 1'b0; s_axil_araddr = '0; s_axil_arvalid = 1'b0;
    s_axil_rready = 1'b0;
    for (int c = 0; c < NUM_DAC; c++) begin dac_en[c] = 0; dac_en_edge[c] = 0; end
    repeat (5) @(negedge clk);
    rst = 1'b0;

    expect_reg(REG_ID, REG_ID_VALUE, "ID");
    axil_write(AXIL_ADDR_W'(REG_TRIG_DELAY), TRIG_DELAY);
    axil_write(AXIL_ADDR_W'(REG_CONTROL), 32'h1);

    // 1. both buffers fill, then report armed
    axil_read(AXIL_ADDR_W'(REG_STATUS), d);
    check(d[3:2] != 2'b11, "buffers not armed right after reset");
    repeat (LIVE_DEPTH + 5) @(negedge clk);
    axil_read(AXIL_ADDR_W'(REG_STATUS), d);
    check(d[3:2] == 2'b11, "both buffers armed after filling");

    // 2. injection with a never-stalling DMA: window and readout time
    inj_expect = 1;
    inject(s_a);
    trig_acc++;
    wait_idle(5000);
    readout_cycles = inj_done_cycle - inj_freeze_cycle;
    check(readout_cycles == NUM_ADC * INJ_DEPTH + 1,
          $sformatf("injection readout took %0d cycles, expected %0d", readout_cycles,
                    NUM_ADC * INJ_DEPTH + 1));
    check_two_bunches(s_a);

    // 3. injection with stalls; a second trigger while the buffer is busy is dropped
    random_ready = 1;
    repeat (INJ_DEPTH + 5) @(negedge clk);   // refill
    inj_expect = 1;
    inject(s_a);
    trig_acc++;
    repeat (TRIG_DELAY + 20) @(negedge clk);
    inject(s_b);                              // delayed pulse meets a busy buffer
    trig_acc++;
    inj_drop++;
    wait_idle(5000);
    check_two_bunches(s_a);

    // 4. trigger disabled: ignored
    repeat (INJ_DEPTH + 5) @(negedge clk);
    axil_write(AXIL_ADDR_W'(REG_CONTROL), 32'h0);
    inject(s_b);
    trig_ign++;
    repeat (TRIG_DELAY + 20) @(negedge clk);
    check(inj_newest.size() == 0 && inj_axis_tvalid == 1'b0, "no capture while disabled");
    axil_write(AXIL_ADDR_W'(REG_CONTROL), 32'h1);

    // 5. live display capture, overlapping an injection capture; a second
    //    live request while busy is dropped
    live_expect = 1;
    axil_write(AXIL_ADDR_W'(REG_LIVE_REQ), 32'h1);
    repeat (20) @(negedge clk);
    inj_expect = 1;
    inject(s_a);
    trig_acc++;
    axil_write(AXIL_ADDR_W'(REG_LIVE_REQ), 32'h1);
    live_drop++;
    wait_idle(40000);
    check_two_bunches(s_a);

    // 6. one more live capture without stalls (the 1 Hz monitoring readout)
    random_ready = 0;
    repeat (LIVE_DEPTH + 5) @(negedge clk);
    live_expect = 1;
    axil_write(AXIL_ADDR_W'(REG_LIVE_REQ), 32'h1);
    wait_idle(40000);

    // 7. status counters
    expect_reg(REG_TRIG_COUNT, trig_acc, "TRIG_COUNT");
    expect_reg(REG_TRIG_IGNORED, trig_ign, "TRIG_IGNORED");
    expect_reg(REG_INJ_FRAMES, inj_caps, "INJ_FRAMES");
    expect_reg(REG_LIVE_FRAMES, live_caps, "LIVE_FRAMES");
    expect_reg(REG_INJ_DROPS, inj_drop, "INJ_DROPS");
    expect_reg(REG_LIVE_DROPS, live_drop, "LIVE_DROPS");

    // 8. DAC playback: fill both memories completely, loop over all words,
    //    then over a short loop
    for (int c = 0; c < NUM_DAC; c++)
      for (int p = 0; p < NPAIR; p++) begin
        logic [31:0] v;
        v = {16'(c * 4000 + p), 16'(p * 3 - c)};
        dac_mem[c][p] = v;
        axil_write(AXIL_ADDR_W'(17'h10000 | (c << 15) | (p << 2)), v);
      end
    axil_write(AXIL_ADDR_W'(REG_DAC_LEN), DAC_DEPTH - 1);
    axil_write(AXIL_ADDR_W'(REG_CONTROL), 32'h7);
    repeat (2 * DAC_DEPTH + 10) @(negedge clk);
    axil_write(AXIL_ADDR_W'(REG_CONTROL), 32'h1);
    axil_write(AXIL_ADDR_W'(REG_DAC_LEN), 39);
    axil_write(AXIL_ADDR_W'(REG_CONTROL), 32'h3);
    repeat (200) @(negedge clk);
    axil_write(AXIL_ADDR_W'(REG_CONTROL), 32'h1);
    repeat (5) @(negedge clk);
    check(dac_data == '0, "DAC outputs silent when disabled");

    // mechanism coverage
    $display("injection captures %0d, live captures %0d, stall cycles %0d, concurrent readout cycles %0d",
             inj_caps, live_caps, stall_cycles, concurrent_cycles);
    $display("dropped triggers %0d, dropped live requests %0d, ignored triggers %0d, two-bunch window checks %0d",
             inj_drop, live_drop, trig_ign, bunch_checks);
    $display("DAC words checked %0d, loop wraps %0d", dac_words_checked, dac_wraps);
    check(inj_caps >= 3, "injection captures happened");
    check(live_caps >= 2, "live captures happened");
    check(stall_cycles > 0, "DMA stalls happened");
    check(concurrent_cycles > 0, "both streams active at once");
    check(inj_drop > 0 && live_drop > 0 && trig_ign > 0, "drops and ignored trigger happened");
    check(bunch_checks >= 3 * NUM_ADC, "two-bunch windows checked");
    check(dac_wraps >= 3 && dac_words_checked > 2000, "DAC playback looped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
