// tb_ring_buffer -- self-checking testbench for ring_buffer.
//
// A reference model keeps, per channel, a queue of the last DEPTH words the
// buffer should have written and follows the fill / armed / readout rules
// stated in the module header. At every trigger that should be accepted it
// snapshots the queues into the list of expected beats; every accepted
// output beat is compared with the head of that list (data, TDEST and
// TLAST). Phase 1 runs with continuous input and TREADY high and checks the
// readout latency (last beat accepted NUM_CH*DEPTH+1 cycles after the
// trigger); it also triggers once while filling and once while reading out
// to exercise the drop rule. Phase 2 gates the input and TREADY at random and
// issues random triggers. Capture and drop counters are compared at the end.
// The design is small here (SPC = 2, DEPTH = 10) to keep the run short.
module tb_ring_buffer;

  localparam int unsigned NUM_CH   = 4;
  localparam int unsigned SPC      = 2;
  localparam int unsigned SAMPLE_W = 16;
  localparam int unsigned DEPTH    = 10;
  localparam int unsigned WORD_W   = SPC * SAMPLE_W;
  localparam int unsigned CH_W     = $clog2(NUM_CH);
  localparam int unsigned N_BEATS  = NUM_CH * DEPTH;

  logic                          clk = 1'b0;
  logic                          rst;
  logic                          in_valid;
  logic [NUM_CH-1:0][WORD_W-1:0] in_data;
  logic                          trigger;
  logic                          m_axis_tvalid;
  logic                          m_axis_tready;
  logic [WORD_W-1:0]             m_axis_tdata;
  logic                          m_axis_tlast;
  logic [CH_W-1:0]               m_axis_tdest;
  logic                          busy, armed;
  logic [31:0]                   capture_count, drop_count;

  ring_buffer #(
    .NUM_CH    (NUM_CH),
    .SPC       (SPC),
    .SAMPLE_W  (SAMPLE_W),
    .DEPTH     (DEPTH)
  ) dut (.*);

  always #5 clk = ~clk;

  int unsigned checks   = 0;
  int unsigned failures = 0;
  int unsigned cycle    = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cycle, what);
    end
  endtask

  // ---------------- reference model ----------------
  typedef enum {M_FILL, M_ARMED, M_READOUT} mstate_e;
  mstate_e           mstate;
  int unsigned       mfill;
  logic [WORD_W-1:0] hist [NUM_CH][$];
  logic [WORD_W-1:0] exp_data [$];
  int unsigned       exp_beats_left;
  int unsigned       m_captures, m_drops;
  int unsigned       beat_idx;
  int unsigned       last_trig_cycle, last_done_cycle;

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst) begin
      mstate = M_FILL;
      mfill = 0;
      for (int c = 0; c < NUM_CH; c++) hist[c].delete();
      exp_data.delete();
      exp_beats_left = 0;
      m_captures = 0;
      m_drops = 0;
      beat_idx = 0;
    end else begin
      // output beat check
      if (m_axis_tvalid && m_axis_tready) begin
        if (exp_data.size() == 0) begin
          check(1'b0, "unexpected output beat");
        end else begin
          logic [WORD_W-1:0] e;
          e = exp_data.pop_front();
          check(m_axis_tdata == e, $sformatf("data beat %0d got %h exp %h", beat_idx, m_axis_tdata, e));
          check(m_axis_tdest == CH_W'(beat_idx / DEPTH), "tdest");
          check(m_axis_tlast == ((beat_idx % DEPTH) == DEPTH - 1), "tlast");
        end
        beat_idx++;
      end
      case (mstate)
        M_FILL: begin
          if (trigger) m_drops++;
          if (in_valid) begin
            for (int c = 0; c < NUM_CH; c++) begin
              hist[c].push_back(in_data[c]);
              if (hist[c].size() > DEPTH) void'(hist[c].pop_front());
            end
            mfill++;
            if (mfill == DEPTH) mstate = M_ARMED;
          end
        end
        M_ARMED: begin
          if (in_valid) begin
            for (int c = 0; c < NUM_CH; c++) begin
              hist[c].push_back(in_data[c]);
              if (hist[c].size() > DEPTH) void'(hist[c].pop_front());
            end
          end
          if (trigger) begin
            for (int c = 0; c < NUM_CH; c++)
              for (int i = 0; i < DEPTH; i++) exp_data.push_back(hist[c][i]);
            exp_beats_left = N_BEATS;
            beat_idx = 0;
            mstate = M_READOUT;
            last_trig_cycle = cycle;
          end
        end
        M_READOUT: begin
          if (trigger) m_drops++;
          if (m_axis_tvalid && m_axis_tready) begin
            exp_beats_left--;
            if (exp_beats_left == 0) begin
              mstate = M_FILL;
              mfill = 0;
              m_captures++;
              last_done_cycle = cycle;
            end
          end
        end
      endcase
    end
  end

  // ---------------- stimulus ----------------
  int unsigned wcnt = 0;
  task automatic drive_data();
    for (int c = 0; c < NUM_CH; c++)
      for (int s = 0; s < SPC; s++)
        in_data[c][s*SAMPLE_W +: SAMPLE_W] = SAMPLE_W'((c << 12) ^ (wcnt * SPC + s) ^ $urandom_range(0, 1) << 15);
    wcnt++;
  endtask

  task automatic step();
    @(negedge clk);
    drive_data();
  endtask

  initial begin
    rst = 1'b1; in_valid = 1'b0; trigger = 1'b0; m_axis_tready = 1'b1;
    in_data = '0;
    repeat (4) @(negedge clk);
    rst = 1'b0;
    // Phase 1: continuous input, TREADY high
    in_valid = 1'b1;
    step();
    step();
    trigger = 1'b1;          // while filling: dropped
    step();
    trigger = 1'b0;
    repeat (DEPTH + 3) step();
    check(armed, "armed after DEPTH writes");
    trigger = 1'b1;          // accepted
    step();
    trigger = 1'b0;
    step(); step();
    check(busy, "busy during readout");
    trigger = 1'b1;          // during readout: dropped
    step();
    trigger = 1'b0;
    while (mstate != M_FILL) step();
    check(last_done_cycle - last_trig_cycle == N_BEATS + 1,
          $sformatf("readout latency %0d exp %0d", last_done_cycle - last_trig_cycle, N_BEATS + 1));
    step();
    check(capture_count == 1 && drop_count == 2, "phase 1 counters");

    // Phase 2: random input gaps, stalls and triggers
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      drive_data();
      in_valid      = ($urandom_range(0, 9) < 8);
      m_axis_tready = ($urandom_range(0, 9) < 6);
      trigger       = ($urandom_range(0, 29) == 0);
    end
    @(negedge clk);
    trigger = 1'b0;
    m_axis_tready = 1'b1;
    repeat (3 * N_BEATS) @(negedge clk);
    check(exp_data.size() == 0, "all expected beats received");
    check(capture_count == m_captures, $sformatf("captures %0d exp %0d", capture_count, m_captures));
    check(drop_count == m_drops, $sformatf("drops %0d exp %0d", drop_count, m_drops));
    check(m_captures >= 10, "enough captures in phase 2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
