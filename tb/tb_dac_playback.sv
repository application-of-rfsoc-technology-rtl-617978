// tb_dac_playback -- self-checking testbench for dac_playback.
//
// Both channel memories are loaded with random sample pairs through the
// write port (interleaving the channels, in a shuffled order). The test then
// enables the channels at different times with different loop lengths and
// checks every output word against the waveform predicted from the loaded
// pairs: if enable is first seen at edge e, the word seen by the monitor at
// edge c is word (c - e - 2) mod (last_word + 1), and a channel that has been
// disabled for two edges outputs zero. Re-enabling must restart at word 0.
// Small sizes (SPC = 6, DEPTH = 8) keep the run short.
module tb_dac_playback;

  localparam int unsigned NUM_CH   = 2;
  localparam int unsigned SPC      = 6;
  localparam int unsigned SAMPLE_W = 16;
  localparam int unsigned DEPTH    = 8;
  localparam int unsigned LANES    = SPC / 2;
  localparam int unsigned WORD_W   = SPC * SAMPLE_W;
  localparam int unsigned PTR_W    = $clog2(DEPTH);
  localparam int unsigned PAIR_W   = $clog2(DEPTH * LANES);
  localparam int unsigned NPAIR    = DEPTH * LANES;

  logic                          clk = 1'b0;
  logic                          rst;
  logic                          wr_en;
  logic                          wr_ch;
  logic [PAIR_W-1:0]             wr_pair;
  logic [2*SAMPLE_W-1:0]         wr_data;
  logic [NUM_CH-1:0]             enable;
  logic [PTR_W-1:0]              last_word;
  logic [NUM_CH-1:0][WORD_W-1:0] dac_data;

  dac_playback #(
    .NUM_CH   (NUM_CH),
    .SPC      (SPC),
    .SAMPLE_W (SAMPLE_W),
    .DEPTH    (DEPTH)
  ) dut (.*);

  always #5 clk = ~clk;

  int unsigned checks = 0, failures = 0;
  int unsigned cycle = 0;
  logic [31:0] mm [NUM_CH][NPAIR];
  int          en_edge [NUM_CH];
  int          dis_edge [NUM_CH];
  logic [NUM_CH-1:0] en_prev = '0;
  int unsigned wraps = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cycle, what);
    end
  endtask

  function automatic logic [WORD_W-1:0] word_of(int ch, int w);
    logic [WORD_W-1:0] r;
    for (int l = 0; l < LANES; l++) r[l*32 +: 32] = mm[ch][w*LANES + l];
    return r;
  endfunction

  // Monitor (values from before each edge)
  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (!rst) begin
      for (int c = 0; c < NUM_CH; c++) begin
        if (enable[c] && !en_prev[c]) en_edge[c] = cycle;
        if (!enable[c] && en_prev[c]) dis_edge[c] = cycle;
        if (en_prev[c] && enable[c] && int'(cycle) >= en_edge[c] + 2) begin
          int w;
          w = (int'(cycle) - en_edge[c] - 2) % (int'(last_word) + 1);
          if (w == 0 && int'(cycle) > en_edge[c] + 2) wraps++;
          check(dac_data[c] == word_of(c, w),
                $sformatf("ch%0d word %0d got %h exp %h", c, w, dac_data[c], word_of(c, w)));
        end else if (!enable[c] && !en_prev[c] && int'(cycle) >= dis_edge[c] + 2) begin
          check(dac_data[c] == '0, $sformatf("ch%0d not silent", c));
        end
      end
      en_prev = enable;
    end
  end

  initial begin
    int order [NPAIR*NUM_CH];
    rst = 1'b1; wr_en = 1'b0; wr_ch = 1'b0; wr_pair = '0; wr_data = '0;
    enable = '0; last_word = '0;
    for (int c = 0; c < NUM_CH; c++) begin en_edge[c] = 0; dis_edge[c] = -10; end
    repeat (3) @(negedge clk);
    rst = 1'b0;
    // load both memories in a shuffled order
    for (int i = 0; i < NPAIR*NUM_CH; i++) order[i] = i;
    for (int i = NPAIR*NUM_CH - 1; i > 0; i--) begin
      int j, t;
      j = $urandom_range(0, i);
      t = order[i]; order[i] = order[j]; order[j] = t;
    end
    for (int i = 0; i < NPAIR*NUM_CH; i++) begin
      int ch, p;
      ch = order[i] % NUM_CH;
      p  = order[i] / NUM_CH;
      @(negedge clk);
      wr_en = 1'b1; wr_ch = ch[0]; wr_pair = PAIR_W'(p); wr_data = $urandom();
      mm[ch][p] = wr_data;
    end
    @(negedge clk);
    wr_en = 1'b0;
    repeat (3) @(negedge clk);
    // channel 0, full length
    last_word = PTR_W'(DEPTH - 1);
    enable = 2'b01;
    repeat (3 * DEPTH + 2) @(negedge clk);
    // channel 1 joins later
    enable = 2'b11;
    repeat (2 * DEPTH + 5) @(negedge clk);
    enable = 2'b00;
    repeat (5) @(negedge clk);
    // shorter loop, restart from word 0
    last_word = PTR_W'(2);
    enable = 2'b10;
    repeat (13) @(negedge clk);
    enable = 2'b11;
    repeat (17) @(negedge clk);
    enable = 2'b00;
    repeat (5) @(negedge clk);
    check(wraps >= 6, $sformatf("loop wrapped %0d times", wraps));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
