// dac_playback -- arbitrary waveform replay to the DAC channels.
//
// Each DAC channel owns a waveform memory of DEPTH fabric words, each word
// holding SPC samples (sample 0, the earliest in time, in the low bits). The
// register interface fills the memory two samples at a time: write k carries
// samples 2k (bits 15:0) and 2k+1 (bits 31:16), so a waveform is loaded as a
// contiguous list of sample pairs. The memory of a channel is split into
// SPC/2 lanes of 32 bits; pair k goes to word k / (SPC/2), lane k % (SPC/2).
//
// While a channel is enabled it reads words 0, 1, ..., last_word, 0, 1, ...
// and drives them to its DAC, one word per fabric cycle, so a waveform of
// (last_word+1)*SPC samples repeats without gaps. A disabled channel outputs
// zero and restarts at word 0 when enabled again. Output timing: if enable
// is first seen high at clock edge 0, word 0 is on dac_data after edge 1 and
// word k after edge k+1; the edge that first sees enable low still loads one
// more word, and from the next edge on the output is zero.
//
// The paper states only that the firmware can "replay arbitrary waveforms"
// through the DACs, used for tests such as looping DAC outputs back into the
// ADC inputs. The memory depth, the looping behaviour, the common loop length
// and the loading through 32-bit register writes are this design's choices.
module dac_playback #(
  parameter int unsigned NUM_CH   = bpm_pkg::NUM_DAC,
  parameter int unsigned SPC      = bpm_pkg::DAC_SPC,
  parameter int unsigned SAMPLE_W = bpm_pkg::SAMPLE_W,
  parameter int unsigned DEPTH    = bpm_pkg::DAC_DEPTH,
  localparam int unsigned LANES   = SPC / 2,
  localparam int unsigned WORD_W  = SPC * SAMPLE_W,
  localparam int unsigned PTR_W   = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned PAIR_W  = $clog2(DEPTH * LANES),
  localparam int unsigned CH_W    = (NUM_CH > 1) ? $clog2(NUM_CH) : 1
) (
  input  logic                          clk,
  input  logic                          rst,
  // memory write port (one sample pair per write)
  input  logic                          wr_en,
  input  logic [CH_W-1:0]               wr_ch,
  input  logic [PAIR_W-1:0]             wr_pair,
  input  logic [2*SAMPLE_W-1:0]         wr_data,
  // playback control
  input  logic [NUM_CH-1:0]             enable,
  input  logic [PTR_W-1:0]              last_word,
  // DAC words
  output logic [NUM_CH-1:0][WORD_W-1:0] dac_data
);

  logic [PTR_W-1:0]   wr_word;
  logic [PAIR_W-1:0]  wr_lane;

  assign wr_word = PTR_W'(wr_pair / PAIR_W'(LANES));
  assign wr_lane = wr_pair % PAIR_W'(LANES);

  for (genvar c = 0; c < NUM_CH; c++) begin : g_ch
    logic [PTR_W-1:0] rd_ptr_q;
    logic             en_q;

    // Loop address
    always_ff @(posedge clk) begin
      if (rst) begin
        rd_ptr_q <= '0;
        en_q     <= 1'b0;
      end else begin
        en_q <= enable[c];
        if (!enable[c]) begin
          rd_ptr_q <= '0;
        end else if (!en_q) begin
          rd_ptr_q <= '0;
        end else if (rd_ptr_q >= last_word) begin
          rd_ptr_q <= '0;
        end else begin
          rd_ptr_q <= rd_ptr_q + 1'b1;
        end
      end
    end

    for (genvar l = 0; l < LANES; l++) begin : g_lane
      logic [2*SAMPLE_W-1:0] mem [DEPTH];

      always_ff @(posedge clk) begin
        if (wr_en && (wr_ch == CH_W'(c)) && (wr_lane == PAIR_W'(l))) begin
          mem[wr_word] <= wr_data;
        end
      end

      always_ff @(posedge clk) begin
        if (rst) begin
          dac_data[c][l*2*SAMPLE_W +: 2*SAMPLE_W] <= '0;
        end else begin
          dac_data[c][l*2*SAMPLE_W +: 2*SAMPLE_W] <= en_q ? mem[rd_ptr_q] : '0;
        end
      end
    end
  end

endmodule
