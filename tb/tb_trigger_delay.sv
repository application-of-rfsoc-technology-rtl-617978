// tb_trigger_delay -- self-checking testbench for trigger_delay.
//
// The trigger input is a level driven between clock edges, as an
// asynchronous source would be. A monitor counts clock edges. An input rising
// edge first seen at edge t reaches the delay logic at edge t + 3; if the
// trigger is enabled then and no earlier pulse is still due, exactly one
// output pulse is expected, seen by the monitor at edge t + D + 4 (D + 3
// edges of latency, plus one because the monitor samples the values from
// before each edge). Any other output pulse is a
// failure. Delays 0, 1, 2, 5, 37 and random ones are tried, as are edges
// arriving during a running delay and while disabled, which must be ignored
// and counted.
module tb_trigger_delay;

  localparam int unsigned DELAY_W = 16;

  logic               clk = 1'b0;
  logic               rst;
  logic               trig_in;
  logic               enable;
  logic [DELAY_W-1:0] delay;
  logic               trig_out;
  logic [31:0]        trig_count;
  logic [31:0]        ignored_count;

  trigger_delay #(.DELAY_W(DELAY_W)) dut (.*);

  always #5 clk = ~clk;

  int unsigned checks = 0, failures = 0;
  int unsigned cycle = 0;
  int unsigned exp_pulse [$];
  int unsigned pend [$];
  int unsigned m_acc = 0, m_ign = 0;
  logic        prev_in = 1'b0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cycle, what);
    end
  endtask

  // Monitor and reference model (values from before each edge)
  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (!rst) begin
      if (trig_in && !prev_in) begin
        // the edge reaches the delay logic three edges later
        pend.push_back(cycle + 3);
      end
      if (trig_out) begin
        if (exp_pulse.size() != 0 && exp_pulse[0] == cycle) begin
          check(1'b1, "");
          void'(exp_pulse.pop_front());
        end else begin
          check(1'b0, $sformatf("unexpected pulse (expected at %0d)",
                               exp_pulse.size() ? exp_pulse[0] : 0));
        end
      end else if (exp_pulse.size() != 0 && exp_pulse[0] <= cycle) begin
        check(1'b0, $sformatf("missing pulse due at %0d", exp_pulse[0]));
        void'(exp_pulse.pop_front());
      end
      // accepted if enabled and no pulse still pending at that edge
      if (pend.size() != 0 && pend[0] == cycle) begin
        void'(pend.pop_front());
        if (enable && exp_pulse.size() == 0) begin
          exp_pulse.push_back(cycle + int'(delay) + 1);
          m_acc++;
        end else begin
          m_ign++;
        end
      end
    end
    prev_in = rst ? 1'b0 : trig_in;
  end

  task automatic pulse_in(input int unsigned high_cycles);
    @(negedge clk) trig_in = 1'b1;
    repeat (high_cycles) @(negedge clk);
    trig_in = 1'b0;
  endtask

  initial begin
    rst = 1'b1; trig_in = 1'b0; enable = 1'b1; delay = '0;
    repeat (4) @(negedge clk);
    rst = 1'b0;
    repeat (3) @(negedge clk);
    // fixed delays
    for (int k = 0; k < 5; k++) begin
      int unsigned d;
      d = (k == 0) ? 0 : (k == 1) ? 1 : (k == 2) ? 2 : (k == 3) ? 5 : 37;
      delay = DELAY_W'(d);
      pulse_in(3);
      repeat (d + 10) @(negedge clk);
    end
    // edge during a running delay: ignored
    delay = 16'd40;
    pulse_in(2);
    repeat (10) @(negedge clk);
    pulse_in(2);
    repeat (50) @(negedge clk);
    // disabled: ignored
    enable = 1'b0;
    pulse_in(2);
    repeat (10) @(negedge clk);
    enable = 1'b1;
    // random delays and spacings
    for (int k = 0; k < 60; k++) begin
      delay = DELAY_W'($urandom_range(0, 60));
      pulse_in($urandom_range(1, 5));
      repeat ($urandom_range(1, 80)) @(negedge clk);
    end
    repeat (100) @(negedge clk);
    check(exp_pulse.size() == 0, "all pulses seen");
    check(trig_count == m_acc, $sformatf("trig_count %0d exp %0d", trig_count, m_acc));
    check(ignored_count == m_ign, $sformatf("ignored %0d exp %0d", ignored_count, m_ign));
    check(m_ign >= 2 && m_acc >= 10, "both accepted and ignored edges exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
