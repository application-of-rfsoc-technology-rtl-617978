// tb_live_enob -- workload testbench: an ADC effective-number-of-bits (ENOB)
// measurement taken through the live-display buffer, at default sizes.
//
// The ENOB of the converters is measured with a pure sine whose frequency is a
// whole number n of cycles per record, f_n = n * 4.072 GHz / 8144, so that the
// discrete Fourier transform of one 8144-sample record needs no window. The
// live-display buffer of this design holds exactly 8144 samples per channel,
// so one software request yields one such record for each of the four
// channels. This test plays that measurement end to end:
//   * the ADC model feeds each channel a coherent sine at 90 % of full scale,
//     plus uniform noise scaled so that the channel's ideal ENOB is a chosen
//     target (the per-channel values measured at 150 MHz on real hardware,
//     10.08 / 10.00 / 10.06 / 9.97), rounded to 14 bits and MSB-aligned in
//     16-bit words;
//   * the frequency is stepped through 150 MHz (n = 300), 1.5 GHz (n = 3000)
//     and 1.9995 GHz (n = 3999, the largest below 2 GHz);
//   * for each frequency the test requests one live capture over AXI-Lite and
//     accepts the four frames as the DMA would (random stalls on the second
//     capture);
//   * every beat is compared with the generator (window ending one cycle after
//     the request is taken, channel in TDEST, TLAST per frame);
//   * from each received record it computes SINAD = signal power in bin n over
//     all other non-DC power (total power minus the bin by Parseval), and
//     ENOB = (SINAD - 1.76 dB) / 6.02 dB, and checks it against the target
//     within 0.06 bit (the spread expected from 8144 noise samples).
// The generator repeats with period 8144 samples, so any 8144 contiguous
// samples form a whole number of sine periods: a record that lost, repeated
// or reordered a word would spread the sine over other bins and fail.
module tb_live_enob;
  import bpm_pkg::*;

  localparam int unsigned ADC_W  = ADC_SPC * SAMPLE_W;
  localparam int unsigned DAC_W  = DAC_SPC * SAMPLE_W;
  localparam int unsigned CH_W   = $clog2(NUM_ADC);
  localparam int unsigned NREC   = LIVE_DEPTH * ADC_SPC;   // 8144 samples
  localparam int          FULL   = 8191;                   // 14-bit full scale
  localparam real         PI     = 3.14159265358979323846;
  localparam int          NFREQ  = 3;

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
  // Signal generator: one 8144-sample period per channel and frequency
  // ------------------------------------------------------------------
  const int  tone_bin [NFREQ]      = '{300, 3000, 3999};
  const real target [NUM_ADC]  = '{10.08, 10.00, 10.06, 9.97};
  int        gen [NUM_ADC][NREC];      // 14-bit sample values
  int        freq_sel = -1;            // index into tone_bin, -1 = silence
  int        era_start = 0;            // first word of the current frequency

  function automatic int rand_u16();
    return int'($urandom_range(0, 65535));
  endfunction

  task automatic load_generator(input int f);
    real amp, ps, pn, u;
    amp = 0.9 * FULL;
    ps  = amp * amp / 2.0;
    for (int c = 0; c < NUM_ADC; c++) begin
      // noise power that gives the target SINAD; rounding adds 1/12 LSB^2
      pn = ps / (10.0 ** ((6.02 * target[c] + 1.76) / 10.0)) - 1.0 / 12.0;
      u  = $sqrt(3.0 * pn);            // uniform noise in [-u, u]
      for (int k = 0; k < NREC; k++) begin
        real x;
        int  v;
        x = amp * $sin(2.0 * PI * real'(tone_bin[f]) * real'(k) / real'(NREC) + 0.7 * c)
            + u * (2.0 * real'(rand_u16()) / 65535.0 - 1.0);
        v = int'(x);                   // rounds to nearest
        if (v > FULL) v = FULL;
        if (v < -FULL) v = -FULL;
        gen[c][k] = v;
      end
    end
  endtask

  function automatic logic [ADC_W-1:0] adc_word(int c, int w);
    logic [ADC_W-1:0] r;
    for (int s = 0; s < ADC_SPC; s++) begin
      int v;
      v = (freq_sel < 0) ? 0 : gen[c][(w % LIVE_DEPTH) * ADC_SPC + s];
      r[s*SAMPLE_W +: SAMPLE_W] = SAMPLE_W'(v * 4);   // MSB-aligned 14 bits
    end
    return r;
  endfunction

  // word `cycle` is on adc_data at clock edge `cycle`
  always @(negedge clk) begin
    for (int c = 0; c < NUM_ADC; c++) adc_data[c] <= adc_word(c, cycle);
  end

  // ------------------------------------------------------------------
  // DMA side
  // ------------------------------------------------------------------
  int  live_newest [$];
  int  live_beat = 0, live_caps = 0, stall_cycles = 0;
  int  req_cycle = 0, done_cycle = 0;
  int  rec [NUM_ADC][NREC];              // received record, 14-bit values
  bit  random_ready = 0;

  always @(negedge clk) begin
    live_axis_tready <= random_ready ? ($urandom_range(0, 9) < 6) : 1'b1;
    inj_axis_tready  <= 1'b1;
  end

  always @(posedge clk) begin
    if (!rst) begin
      if (s_axil_awvalid && s_axil_awready && s_axil_awaddr == AXIL_ADDR_W'(REG_LIVE_REQ) &&
          s_axil_wdata[0]) begin
        live_newest.push_back(cycle + 1);
        req_cycle = cycle + 1;
      end
      if (live_axis_tvalid && !live_axis_tready) stall_cycles++;
      check(!inj_axis_tvalid, "no injection stream without trigger");
      if (live_axis_tvalid && live_axis_tready) begin
        if (live_newest.size() == 0) begin
          check(0, "unexpected live beat");
        end else begin
          int ch, w;
          ch = live_beat / LIVE_DEPTH;
          w  = live_newest[0] - LIVE_DEPTH + 1 + live_beat % LIVE_DEPTH;
          check(w >= era_start, "capture holds only the current frequency");
          check(live_axis_tdata == adc_word(ch, w), $sformatf("live data ch%0d word %0d", ch, w));
          check(live_axis_tdest == CH_W'(ch), "live tdest");
          check(live_axis_tlast == (live_beat % LIVE_DEPTH == LIVE_DEPTH - 1), "live tlast");
          for (int s = 0; s < ADC_SPC; s++)
            rec[ch][(live_beat % LIVE_DEPTH) * ADC_SPC + s] =
              int'($signed(live_axis_tdata[s*SAMPLE_W +: SAMPLE_W])) / 4;
          live_beat++;
          if (live_beat == NUM_ADC * LIVE_DEPTH) begin
            live_beat = 0;
            void'(live_newest.pop_front());
            live_caps++;
            done_cycle = cycle;
          end
        end
      end
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

  // ENOB of one received record from its DFT bin n
  function automatic real enob_of(int c, int n);
    real mean, ptot, re, im, psig;
    mean = 0.0;
    for (int k = 0; k < NREC; k++) mean += real'(rec[c][k]);
    mean /= real'(NREC);
    ptot = 0.0; re = 0.0; im = 0.0;
    for (int k = 0; k < NREC; k++) begin
      real x, ph;
      x  = real'(rec[c][k]) - mean;
      ph = 2.0 * PI * real'(n) * real'(k) / real'(NREC);
      ptot += x * x;
      re   += x * $cos(ph);
      im   -= x * $sin(ph);
    end
    psig = 2.0 * (re * re + im * im) / real'(NREC);   // tone_bin n and N - n
    return (10.0 * $log10(psig / (ptot - psig)) - 1.76) / 6.02;
  endfunction

  // ------------------------------------------------------------------
  // Test sequence
  // ------------------------------------------------------------------
  int unsigned enob_checks = 0;

  initial begin
    logic [31:0] d;
    rst = 1'b1; adc_valid = 1'b1; inj_trig = 1'b0;
    s_axil_awaddr = '0; s_axil_awvalid = 1'b0; s_axil_wdata = '0; s_axil_wstrb = '0;
    s_axil_wvalid = 1'b0; s_axil_bready = 1'b0; s_axil_araddr = '0; s_axil_arvalid = 1'b0;
    s_axil_rready = 1'b0;
    repeat (5) @(negedge clk);
    rst = 1'b0;

    for (int f = 0; f < NFREQ; f++) begin
      // switch the generator, then let the buffer fill with the new tone
      @(negedge clk);
      load_generator(f);
      freq_sel  = f;
      era_start = cycle + 1;
      random_ready = (f == 1);
      repeat (LIVE_DEPTH + 10) @(negedge clk);
      axil_read(AXIL_ADDR_W'(REG_STATUS), d);
      check(d[3], "live buffer armed before the request");
      axil_write(AXIL_ADDR_W'(REG_LIVE_REQ), 32'h1);
      while (live_caps != f + 1 && cycle < era_start + 40 * LIVE_DEPTH) @(negedge clk);
      check(live_caps == f + 1, $sformatf("capture %0d received", f));
      if (!random_ready)
        check(done_cycle - req_cycle == NUM_ADC * LIVE_DEPTH + 1,
              $sformatf("live readout took %0d cycles, expected %0d",
                        done_cycle - req_cycle, NUM_ADC * LIVE_DEPTH + 1));
      for (int c = 0; c < NUM_ADC; c++) begin
        real e;
        e = enob_of(c, tone_bin[f]);
        $display("f = %7.2f MHz  channel %s  ENOB %5.2f  (target %5.2f)",
                 real'(tone_bin[f]) * 4072.0 / real'(NREC), string'(8'(65 + c)), e, target[c]);
        check(e > target[c] - 0.06 && e < target[c] + 0.06,
              $sformatf("ENOB ch%0d f%0d = %f", c, f, e));
        enob_checks++;
      end
    end

    axil_read(AXIL_ADDR_W'(REG_LIVE_FRAMES), d);
    check(d == 32'(NFREQ), "LIVE_FRAMES counter");
    axil_read(AXIL_ADDR_W'(REG_LIVE_DROPS), d);
    check(d == 0, "no live request dropped");

    $display("mechanisms: live captures %0d, DMA stall cycles %0d, ENOB evaluations %0d",
             live_caps, stall_cycles, enob_checks);
    check(live_caps == NFREQ, "every frequency captured");
    check(stall_cycles > 0, "DMA stalls exercised");
    check(enob_checks == NFREQ * NUM_ADC, "every channel evaluated");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
