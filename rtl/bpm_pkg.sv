// bpm_pkg -- constants and register map shared by the injection-point BPM
// readout firmware.
//
// The RF data converter samples four pickup channels at 4.072 GSPS (eight
// times the 509 MHz accelerator RF reference) and drives two DAC channels at
// 6.108 GSPS. The programmable logic runs on one fabric clock of
// 4.072 GHz / 16 = 254.5 MHz, so every fabric cycle carries 16 ADC samples per
// channel and 24 DAC samples per channel. The sample rates and channel counts
// follow the paper; the fabric clock and hence the samples per cycle are this
// design's choice. Samples are 16-bit two's complement words: the 14-bit
// converter values sit MSB-aligned in them, as the RFSoC delivers them.
//
// Register map of the AXI-Lite slave (byte addresses, 32-bit registers):
//   0x0000 ID          RO  constant REG_ID_VALUE
//   0x0004 SCRATCH     RW  free scratch register
//   0x0008 CONTROL     RW  bit0 injection trigger enable,
//                          bit1 DAC0 playback enable, bit2 DAC1 playback enable
//   0x000C TRIG_DELAY  RW  injection trigger delay in fabric cycles
//   0x0010 LIVE_REQ    WO  writing bit0 = 1 requests one live-display readout
//   0x0014 DAC_LEN     RW  playback loop length in DAC words, minus one
//   0x0018 TRIG_COUNT  RO  injection triggers accepted
//   0x001C TRIG_IGNORED RO injection trigger edges ignored
//   0x0020 STATUS      RO  bit0 injection buffer busy, bit1 live buffer busy,
//                          bit2 injection buffer armed, bit3 live buffer armed
//   0x0024 INJ_FRAMES  RO  injection captures completed
//   0x0028 LIVE_FRAMES RO  live-display captures completed
//   0x002C INJ_DROPS   RO  injection triggers dropped (buffer filling or busy)
//   0x0030 LIVE_DROPS  RO  live requests dropped (buffer filling or busy)
//   0x10000 + ch*0x8000 + 4*k   WO  DAC playback memory of channel ch,
//                          samples 2k (bits 15:0) and 2k+1 (bits 31:16)
package bpm_pkg;

  // Converter channels and sample format
  localparam int unsigned NUM_ADC   = 4;    // ADC channels A..D
  localparam int unsigned NUM_DAC   = 2;    // DAC channels
  localparam int unsigned SAMPLE_W  = 16;   // bits per sample word
  localparam int unsigned ADC_SPC   = 16;   // ADC samples per fabric cycle
  localparam int unsigned DAC_SPC   = 24;   // DAC samples per fabric cycle

  // Ring buffer depths in fabric words (ADC_SPC samples each).
  // 76 words = 1216 samples = 298.6 ns ("around 300 ns").
  // 509 words = 8144 samples = 2.000 us at 4.072 GSPS.
  localparam int unsigned INJ_DEPTH  = 76;
  localparam int unsigned LIVE_DEPTH = 509;

  // DAC playback memory depth in fabric words (DAC_SPC samples each):
  // 512 words = 12288 samples = 2.01 us at 6.108 GSPS.
  localparam int unsigned DAC_DEPTH = 512;

  // Register interface
  localparam int unsigned AXIL_ADDR_W = 17;
  localparam int unsigned AXIL_DATA_W = 32;
  localparam int unsigned TRIG_DELAY_W = 16;

  localparam logic [31:0] REG_ID_VALUE = 32'h4250_4D31;  // "BPM1"

  typedef enum logic [7:0] {
    REG_ID           = 8'h00,
    REG_SCRATCH      = 8'h04,
    REG_CONTROL      = 8'h08,
    REG_TRIG_DELAY   = 8'h0C,
    REG_LIVE_REQ     = 8'h10,
    REG_DAC_LEN      = 8'h14,
    REG_TRIG_COUNT   = 8'h18,
    REG_TRIG_IGNORED = 8'h1C,
    REG_STATUS       = 8'h20,
    REG_INJ_FRAMES   = 8'h24,
    REG_LIVE_FRAMES  = 8'h28,
    REG_INJ_DROPS    = 8'h2C,
    REG_LIVE_DROPS   = 8'h30
  } reg_addr_e;

  // Fields of the CONTROL register (bits 31:3 read as zero)
  typedef struct packed {
    logic        dac1_en;
    logic        dac0_en;
    logic        trig_en;
  } control_t;

endpackage
