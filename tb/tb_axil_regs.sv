// tb_axil_regs -- self-checking testbench for axil_regs.
//
// An AXI-Lite master task pair issues writes (address and data presented in
// either order, with a random delay between them and before BREADY) and
// reads (random delay before RREADY). The test checks: the ID constant, the
// scratch, control, trigger-delay and loop-length registers read back and
// drive their outputs; a LIVE_REQ write produces exactly one request pulse;
// writes into the DAC window produce one memory write each with the right
// channel, pair index and data; every status input is readable at its
// address; unmapped addresses and pair indices past the memory answer
// SLVERR and cause no side effect.
module tb_axil_regs;
  import bpm_pkg::*;

  localparam int unsigned MEM_DEPTH = 8;
  localparam int unsigned MEM_SPC   = 6;
  localparam int unsigned NPAIR     = MEM_DEPTH * MEM_SPC / 2;
  localparam int unsigned PAIR_W    = $clog2(NPAIR);
  localparam int unsigned DPTR_W    = $clog2(MEM_DEPTH);

  logic                    clk = 1'b0;
  logic                    rst;
  logic [AXIL_ADDR_W-1:0]  s_axil_awaddr;
  logic                    s_axil_awvalid;
  logic                    s_axil_awready;
  logic [AXIL_DATA_W-1:0]  s_axil_wdata;
  logic [3:0]              s_axil_wstrb;
  logic                    s_axil_wvalid;
  logic                    s_axil_wready;
  logic [1:0]              s_axil_bresp;
  logic                    s_axil_bvalid;
  logic                    s_axil_bready;
  logic [AXIL_ADDR_W-1:0]  s_axil_araddr;
  logic                    s_axil_arvalid;
  logic                    s_axil_arready;
  logic [AXIL_DATA_W-1:0]  s_axil_rdata;
  logic [1:0]              s_axil_rresp;
  logic                    s_axil_rvalid;
  logic                    s_axil_rready;
  control_t                control;
  logic [TRIG_DELAY_W-1:0] trig_delay;
  logic                    live_req;
  logic [DPTR_W-1:0]       dac_last_word;
  logic                    dac_wr_en;
  logic                    dac_wr_ch;
  logic [PAIR_W-1:0]       dac_wr_pair;
  logic [31:0]             dac_wr_data;
  logic [31:0]             trig_count, trig_ignored, inj_frames, live_frames;
  logic [31:0]             inj_drops, live_drops;
  logic                    inj_busy, live_busy, inj_armed, live_armed;

  axil_regs #(.MEM_DEPTH(MEM_DEPTH), .MEM_SPC(MEM_SPC)) dut (.*);

  always #5 clk = ~clk;

  int unsigned checks = 0, failures = 0;
  int unsigned live_pulses = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // Side-effect monitor
  logic [PAIR_W-1:0] wr_pairs [$];
  logic              wr_chs   [$];
  logic [31:0]       wr_datas [$];
  always @(posedge clk) begin
    if (!rst) begin
      if (live_req) live_pulses++;
      if (dac_wr_en) begin
        wr_pairs.push_back(dac_wr_pair);
        wr_chs.push_back(dac_wr_ch);
        wr_datas.push_back(dac_wr_data);
      end
    end
  end

  task automatic axil_write(input logic [AXIL_ADDR_W-1:0] addr,
                            input logic [31:0] data, output logic [1:0] resp);
    int unsigned gap;
    bit          aw_first;
    gap      = $urandom_range(0, 3);
    aw_first = $urandom_range(0, 1);
    @(negedge clk);
    if (aw_first) begin s_axil_awaddr = addr; s_axil_awvalid = 1'b1; end
    else          begin s_axil_wdata  = data; s_axil_wvalid  = 1'b1; s_axil_wstrb = 4'hF; end
    repeat (gap) @(negedge clk);
    if (aw_first) begin s_axil_wdata  = data; s_axil_wvalid  = 1'b1; s_axil_wstrb = 4'hF; end
    else          begin s_axil_awaddr = addr; s_axil_awvalid = 1'b1; end
    // wait for the handshake
    do @(posedge clk); while (!(s_axil_awready && s_axil_wready));
    @(negedge clk);
    s_axil_awvalid = 1'b0;
    s_axil_wvalid  = 1'b0;
    repeat ($urandom_range(0, 3)) begin
      @(negedge clk);
      check(s_axil_bvalid, "BVALID held while BREADY low");
    end
    s_axil_bready = 1'b1;
    do @(posedge clk); while (!s_axil_bvalid);
    resp = s_axil_bresp;
    @(negedge clk);
    s_axil_bready = 1'b0;
  endtask

  task automatic axil_read(input logic [AXIL_ADDR_W-1:0] addr,
                           output logic [31:0] data, output logic [1:0] resp);
    @(negedge clk);
    s_axil_araddr  = addr;
    s_axil_arvalid = 1'b1;
    do @(posedge clk); while (!s_axil_arready);
    @(negedge clk);
    s_axil_arvalid = 1'b0;
    repeat ($urandom_range(0, 3)) @(negedge clk);
    s_axil_rready = 1'b1;
    do @(posedge clk); while (!s_axil_rvalid);
    data = s_axil_rdata;
    resp = s_axil_rresp;
    @(negedge clk);
    s_axil_rready = 1'b0;
  endtask

  task automatic expect_read(input logic [AXIL_ADDR_W-1:0] addr, input logic [31:0] exp,
                             input string what);
    logic [31:0] d;
    logic [1:0]  r;
    axil_read(addr, d, r);
    check(r == 2'b00 && d == exp, $sformatf("%s: read %h resp %0d, exp %h", what, d, r, exp));
  endtask

  initial begin
    logic [1:0]  r;
    logic [31:0] d;
    logic [31:0] sent_data [$];
    logic [PAIR_W-1:0] sent_pair [$];
    logic        sent_ch [$];
    rst = 1'b1;
    s_axil_awaddr = '0; s_axil_awvalid = 1'b0; s_axil_wdata = '0; s_axil_wstrb = '0;
    s_axil_wvalid = 1'b0; s_axil_bready = 1'b0; s_axil_araddr = '0; s_axil_arvalid = 1'b0;
    s_axil_rready = 1'b0;
    trig_count = $urandom(); trig_ignored = $urandom(); inj_frames = $urandom();
    live_frames = $urandom(); inj_drops = $urandom(); live_drops = $urandom();
    inj_busy = 1'b1; live_busy = 1'b0; inj_armed = 1'b0; live_armed = 1'b1;
    repeat (4) @(negedge clk);
    rst = 1'b0;

    expect_read(AXIL_ADDR_W'(REG_ID), REG_ID_VALUE, "ID");
    axil_write(AXIL_ADDR_W'(REG_SCRATCH), 32'hDEAD_BEEF, r);
    check(r == 2'b00, "scratch write resp");
    expect_read(AXIL_ADDR_W'(REG_SCRATCH), 32'hDEAD_BEEF, "scratch");

    axil_write(AXIL_ADDR_W'(REG_CONTROL), 32'hFFFF_FFFD, r);
    check(control.trig_en && !control.dac0_en && control.dac1_en,
          "control outputs");
    expect_read(AXIL_ADDR_W'(REG_CONTROL), 32'h5, "control readback");

    axil_write(AXIL_ADDR_W'(REG_TRIG_DELAY), 32'h0001_1234, r);
    check(trig_delay == 16'h1234, "trig_delay output");
    expect_read(AXIL_ADDR_W'(REG_TRIG_DELAY), 32'h1234, "trig_delay readback");

    axil_write(AXIL_ADDR_W'(REG_DAC_LEN), 32'h5, r);
    check(dac_last_word == DPTR_W'(5), "dac_last_word output");
    expect_read(AXIL_ADDR_W'(REG_DAC_LEN), 32'h5, "dac_len readback");

    // live request pulses
    axil_write(AXIL_ADDR_W'(REG_LIVE_REQ), 32'h1, r);
    axil_write(AXIL_ADDR_W'(REG_LIVE_REQ), 32'h0, r);
    axil_write(AXIL_ADDR_W'(REG_LIVE_REQ), 32'h1, r);
    repeat (2) @(negedge clk);
    check(live_pulses == 2, $sformatf("live_req pulses %0d exp 2", live_pulses));

    // status inputs
    expect_read(AXIL_ADDR_W'(REG_TRIG_COUNT),   trig_count,   "trig_count");
    expect_read(AXIL_ADDR_W'(REG_TRIG_IGNORED), trig_ignored, "trig_ignored");
    expect_read(AXIL_ADDR_W'(REG_INJ_FRAMES),   inj_frames,   "inj_frames");
    expect_read(AXIL_ADDR_W'(REG_LIVE_FRAMES),  live_frames,  "live_frames");
    expect_read(AXIL_ADDR_W'(REG_INJ_DROPS),    inj_drops,    "inj_drops");
    expect_read(AXIL_ADDR_W'(REG_LIVE_DROPS),   live_drops,   "live_drops");
    expect_read(AXIL_ADDR_W'(REG_STATUS),       32'b1001,     "status");

    // writes to read-only registers change nothing
    axil_write(AXIL_ADDR_W'(REG_ID), 32'h0, r);
    check(r == 2'b00, "RO write resp");
    expect_read(AXIL_ADDR_W'(REG_ID), REG_ID_VALUE, "ID after write");

    // DAC window
    for (int i = 0; i < 20; i++) begin
      logic [PAIR_W-1:0] p;
      logic              ch;
      logic [31:0]       v;
      p  = PAIR_W'($urandom_range(0, NPAIR - 1));
      ch = 1'($urandom_range(0, 1));
      v  = $urandom();
      axil_write(AXIL_ADDR_W'(17'h10000 | (ch << 15) | (p << 2)), v, r);
      check(r == 2'b00, "DAC write resp");
      sent_data.push_back(v); sent_pair.push_back(p); sent_ch.push_back(ch);
    end
    // past the end of the memory: SLVERR, no write
    axil_write(AXIL_ADDR_W'(17'h10000 | (NPAIR << 2)), 32'h1234_5678, r);
    check(r == 2'b10, "DAC out-of-range write answers SLVERR");
    repeat (2) @(negedge clk);
    check(wr_pairs.size() == 20, $sformatf("DAC writes %0d exp 20", wr_pairs.size()));
    for (int i = 0; i < 20 && i < wr_pairs.size(); i++) begin
      check(wr_pairs[i] == sent_pair[i] && wr_chs[i] == sent_ch[i] && wr_datas[i] == sent_data[i],
            $sformatf("DAC write %0d", i));
    end

    // unmapped addresses
    axil_write(AXIL_ADDR_W'(8'h80), 32'h1, r);
    check(r == 2'b10, "unmapped write answers SLVERR");
    axil_write(AXIL_ADDR_W'(17'h00104), 32'h1, r);
    check(r == 2'b10, "unmapped page write answers SLVERR");
    axil_read(AXIL_ADDR_W'(8'h84), d, r);
    check(r == 2'b10, "unmapped read answers SLVERR");
    expect_read(AXIL_ADDR_W'(REG_SCRATCH), 32'hDEAD_BEEF, "scratch unchanged");
    check(live_pulses == 2, "no stray live requests");

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
