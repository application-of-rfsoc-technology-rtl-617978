// rfsoc_bpm_top -- programmable-logic part of the RFSoC readout for the
// injection-point beam position monitors.
//
// The four pickup signals, digitised by the RF data converter at 4.072 GSPS,
// arrive as one 16-sample word per channel and fabric cycle. They feed two
// ring-buffer stacks at once:
//   * the injection waveform buffer, 76 words (about 300 ns) per channel,
//     long enough to hold both bunches of a two-bunch injection (96 ns apart).
//     It is frozen and read out by the injection trigger after a programmable
//     delay (trigger_delay);
//   * the live display buffer, 509 words (8144 samples, 2 us) per channel,
//     frozen and read out on a software request written to a register.
// Each stack sends its capture on its own AXI-Stream master towards the DMA
// engine, one frame per channel (TDEST = channel). The AXI-Lite
// register block (axil_regs) configures everything and loads the DAC playback
// memories; dac_playback replays the loaded waveforms to the two DACs.
//
// Outside this module, and brought out as ports: the RF data converter (ADC
// words in, DAC words out), the DMA engine (the two stream masters) and the
// AXI4 to AXI-Lite bridge of the processing system (the AXI-Lite slave).
// The split into these blocks follows the paper's firmware diagram; the
// single fabric clock, the sample packing and all interface details are this
// design's own.
//
// Everything runs on one clock, clk (254.5 MHz for 4.072 GSPS with 16 samples
// per cycle), with a synchronous active-high reset. inj_trig is asynchronous.
module rfsoc_bpm_top
  import bpm_pkg::*;
#(
  parameter int unsigned INJ_BUF_DEPTH  = bpm_pkg::INJ_DEPTH,
  parameter int unsigned LIVE_BUF_DEPTH = bpm_pkg::LIVE_DEPTH,
  parameter int unsigned DAC_MEM_DEPTH  = bpm_pkg::DAC_DEPTH,
  localparam int unsigned ADC_W  = ADC_SPC * SAMPLE_W,
  localparam int unsigned DAC_W  = DAC_SPC * SAMPLE_W,
  localparam int unsigned CH_W   = $clog2(NUM_ADC)
) (
  input  logic                           clk,
  input  logic                           rst,
  // from the RF data converter
  input  logic                           adc_valid,
  input  logic [NUM_ADC-1:0][ADC_W-1:0]  adc_data,
  // to the RF data converter
  output logic [NUM_DAC-1:0][DAC_W-1:0]  dac_data,
  // injection trigger from accelerator controls (asynchronous)
  input  logic                           inj_trig,
  // AXI-Stream to the DMA: injection waveform buffer
  output logic                           inj_axis_tvalid,
  input  logic                           inj_axis_tready,
  output logic [ADC_W-1:0]               inj_axis_tdata,
  output logic                           inj_axis_tlast,
  output logic [CH_W-1:0]                inj_axis_tdest,
  // AXI-Stream to the DMA: live display buffer
  output logic                           live_axis_tvalid,
  input  logic                           live_axis_tready,
  output logic [ADC_W-1:0]               live_axis_tdata,
  output logic                           live_axis_tlast,
  output logic [CH_W-1:0]                live_axis_tdest,
  // AXI-Lite register access from the processing system
  input  logic [AXIL_ADDR_W-1:0]         s_axil_awaddr,
  input  logic                           s_axil_awvalid,
  output logic                           s_axil_awready,
  input  logic [AXIL_DATA_W-1:0]         s_axil_wdata,
  input  logic [3:0]                     s_axil_wstrb,
  input  logic                           s_axil_wvalid,
  output logic                           s_axil_wready,
  output logic [1:0]                     s_axil_bresp,
  output logic                           s_axil_bvalid,
  input  logic                           s_axil_bready,
  input  logic [AXIL_ADDR_W-1:0]         s_axil_araddr,
  input  logic                           s_axil_arvalid,
  output logic                           s_axil_arready,
  output logic [AXIL_DATA_W-1:0]         s_axil_rdata,
  output logic [1:0]                     s_axil_rresp,
  output logic                           s_axil_rvalid,
  input  logic                           s_axil_rready
);

  localparam int unsigned PAIR_W = $clog2(DAC_MEM_DEPTH * DAC_SPC / 2);
  localparam int unsigned DPTR_W = (DAC_MEM_DEPTH > 1) ? $clog2(DAC_MEM_DEPTH) : 1;

  control_t                control;
  logic [TRIG_DELAY_W-1:0] trig_delay;
  logic                    live_req;
  logic [DPTR_W-1:0]       dac_last_word;
  logic                    dac_wr_en;
  logic                    dac_wr_ch;
  logic [PAIR_W-1:0]       dac_wr_pair;
  logic [31:0]             dac_wr_data;

  logic                    inj_trig_delayed;
  logic [31:0]             trig_count, trig_ignored;
  logic                    inj_busy, live_busy;
  logic                    inj_armed, live_armed;
  logic [31:0]             inj_frames, live_frames;
  logic [31:0]             inj_drops, live_drops;

  // Register access
  axil_regs #(
    .MEM_DEPTH (DAC_MEM_DEPTH),
    .MEM_SPC   (DAC_SPC)
  ) u_regs (
    .clk, .rst,
    .s_axil_awaddr, .s_axil_awvalid, .s_axil_awready,
    .s_axil_wdata, .s_axil_wstrb, .s_axil_wvalid, .s_axil_wready,
    .s_axil_bresp, .s_axil_bvalid, .s_axil_bready,
    .s_axil_araddr, .s_axil_arvalid, .s_axil_arready,
    .s_axil_rdata, .s_axil_rresp, .s_axil_rvalid, .s_axil_rready,
    .control,
    .trig_delay,
    .live_req,
    .dac_last_word,
    .dac_wr_en,
    .dac_wr_ch,
    .dac_wr_pair,
    .dac_wr_data,
    .trig_count,
    .trig_ignored,
    .inj_busy,
    .live_busy,
    .inj_armed,
    .live_armed,
    .inj_frames,
    .live_frames,
    .inj_drops,
    .live_drops
  );

  // Injection trigger with delay
  trigger_delay #(
    .DELAY_W (TRIG_DELAY_W)
  ) u_trig (
    .clk, .rst,
    .trig_in       (inj_trig),
    .enable        (control.trig_en),
    .delay         (trig_delay),
    .trig_out      (inj_trig_delayed),
    .trig_count    (trig_count),
    .ignored_count (trig_ignored)
  );

  // Injection waveform ring buffer (about 300 ns)
  ring_buffer #(
    .NUM_CH    (NUM_ADC),
    .SPC       (ADC_SPC),
    .SAMPLE_W  (SAMPLE_W),
    .DEPTH     (INJ_BUF_DEPTH)
  ) u_inj_buf (
    .clk, .rst,
    .in_valid      (adc_valid),
    .in_data       (adc_data),
    .trigger       (inj_trig_delayed),
    .m_axis_tvalid (inj_axis_tvalid),
    .m_axis_tready (inj_axis_tready),
    .m_axis_tdata  (inj_axis_tdata),
    .m_axis_tlast  (inj_axis_tlast),
    .m_axis_tdest  (inj_axis_tdest),
    .busy          (inj_busy),
    .armed         (inj_armed),
    .capture_count (inj_frames),
    .drop_count    (inj_drops)
  );

  // Live display ring buffer (2 us)
  ring_buffer #(
    .NUM_CH    (NUM_ADC),
    .SPC       (ADC_SPC),
    .SAMPLE_W  (SAMPLE_W),
    .DEPTH     (LIVE_BUF_DEPTH)
  ) u_live_buf (
    .clk, .rst,
    .in_valid      (adc_valid),
    .in_data       (adc_data),
    .trigger       (live_req),
    .m_axis_tvalid (live_axis_tvalid),
    .m_axis_tready (live_axis_tready),
    .m_axis_tdata  (live_axis_tdata),
    .m_axis_tlast  (live_axis_tlast),
    .m_axis_tdest  (live_axis_tdest),
    .busy          (live_busy),
    .armed         (live_armed),
    .capture_count (live_frames),
    .drop_count    (live_drops)
  );

  // DAC playback
  dac_playback #(
    .NUM_CH   (NUM_DAC),
    .SPC      (DAC_SPC),
    .SAMPLE_W (SAMPLE_W),
    .DEPTH    (DAC_MEM_DEPTH)
  ) u_dac (
    .clk, .rst,
    .wr_en     (dac_wr_en),
    .wr_ch     (dac_wr_ch),
    .wr_pair   (dac_wr_pair),
    .wr_data   (dac_wr_data),
    .enable    ({control.dac1_en, control.dac0_en}),
    .last_word (dac_last_word),
    .dac_data  (dac_data)
  );

endmodule
