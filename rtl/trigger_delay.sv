// trigger_delay -- injection trigger conditioning for the injection waveform
// ring buffer.
//
// The injection trigger arrives from accelerator controls (at most 25 Hz),
// asynchronous to the fabric clock. It passes a two-flop synchroniser; its
// rising edge, if triggers are enabled and no earlier trigger is still being
// delayed, loads a down-counter with `delay`. When the counter expires the
// module emits a one-cycle pulse on trig_out. With delay = D the pulse comes
// D + 3 cycles after the input edge is first sampled (two synchroniser
// stages, one edge-detect register, D counting cycles; D = 0 gives 3).
//
// The paper states only that "a suitable delay is applied to the trigger in
// the firmware". The synchroniser, the whole-cycle granularity, the 16-bit
// delay width and the rule that an edge arriving while a delay runs is
// ignored (and counted) are this design's choices.
//
// Interface: clk/rst (synchronous, active high), trig_in (async level),
// enable, delay (fabric cycles), trig_out (pulse), trig_count and
// ignored_count (32-bit, wrap around).
module trigger_delay #(
  parameter int unsigned DELAY_W = 16
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               trig_in,
  input  logic               enable,
  input  logic [DELAY_W-1:0] delay,
  output logic               trig_out,
  output logic [31:0]        trig_count,
  output logic [31:0]        ignored_count
);

  logic [1:0]         sync_q;
  logic               level_q;
  logic               edge_q;
  logic               busy_q;
  logic [DELAY_W-1:0] count_q;

  // Two-flop synchroniser plus edge detector
  always_ff @(posedge clk) begin
    if (rst) begin
      sync_q  <= '0;
      level_q <= 1'b0;
      edge_q  <= 1'b0;
    end else begin
      sync_q  <= {sync_q[0], trig_in};
      level_q <= sync_q[1];
      edge_q  <= sync_q[1] & ~level_q;
    end
  end

  // Delay counter
  always_ff @(posedge clk) begin
    if (rst) begin
      busy_q        <= 1'b0;
      count_q       <= '0;
      trig_out      <= 1'b0;
      trig_count    <= '0;
      ignored_count <= '0;
    end else begin
      trig_out <= 1'b0;
      if (busy_q) begin
        if (count_q == '0) begin
          busy_q   <= 1'b0;
          trig_out <= 1'b1;
        end else begin
          count_q <= count_q - 1'b1;
        end
      end
      if (edge_q) begin
        if (enable && !busy_q) begin
          trig_count <= trig_count + 1'b1;
          if (delay == '0) begin
            trig_out <= 1'b1;
          end else begin
            busy_q  <= 1'b1;
            count_q <= delay - 1'b1;
          end
        end else begin
          ignored_count <= ignored_count + 1'b1;
        end
      end
    end
  end

endmodule
