// ring_buffer -- one stack of per-channel ADC ring buffers with triggered
// readout over AXI-Stream.
//
// Every ADC channel has its own ring of DEPTH fabric words; all channels are
// written together at one write pointer, so the design keeps them as one
// memory whose word holds the NUM_CH channel words side by side. While
// recording, each valid input word is written and the write pointer wraps at
// DEPTH. After (re)arming, the buffer first records DEPTH words (state FILL)
// so that a capture never contains data older than the arming; it is then
// ARMED. A trigger in the ARMED state freezes the buffer: the word present in
// the trigger cycle is the last one kept. The stack then sends NUM_CH frames,
// channel 0 first, each DEPTH beats long and oldest word first, with TDEST set
// to the channel number and TLAST on the last beat of each frame. When the
// last beat has been accepted the buffer re-arms. Triggers that arrive while
// filling or reading out are dropped and counted.
//
// The design instantiates this module twice, as in the paper's firmware: the
// injection waveform buffer (about 300 ns, triggered by the delayed injection
// trigger) and the live display buffer (2 us, triggered by a software
// request). The paper gives the two sizes, the four channels and the AXI-Stream
// output towards the DMA; the freeze-then-read scheme, the fill rule, the
// frame format and the drop rule are this design's own.
//
// Timing: the memory has one cycle of read latency and its read register is
// the stream's output register, so a frame streams at one beat per cycle when
// TREADY stays high; a full readout takes NUM_CH*DEPTH accepted beats plus one
// cycle. TREADY may drop at any time: TVALID and the payload then hold.
module ring_buffer #(
  parameter int unsigned NUM_CH    = bpm_pkg::NUM_ADC,
  parameter int unsigned SPC       = bpm_pkg::ADC_SPC,
  parameter int unsigned SAMPLE_W  = bpm_pkg::SAMPLE_W,
  parameter int unsigned DEPTH     = bpm_pkg::INJ_DEPTH,
  localparam int unsigned WORD_W   = SPC * SAMPLE_W,
  localparam int unsigned PTR_W    = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned CH_W     = (NUM_CH > 1) ? $clog2(NUM_CH) : 1
) (
  input  logic                          clk,
  input  logic                          rst,
  // ADC words, one per channel
  input  logic                          in_valid,
  input  logic [NUM_CH-1:0][WORD_W-1:0] in_data,
  // capture request
  input  logic                          trigger,
  // AXI-Stream master towards the DMA
  output logic                          m_axis_tvalid,
  input  logic                          m_axis_tready,
  output logic [WORD_W-1:0]             m_axis_tdata,
  output logic                          m_axis_tlast,
  output logic [CH_W-1:0]               m_axis_tdest,
  // status
  output logic                          busy,
  output logic                          armed,
  output logic [31:0]                   capture_count,
  output logic [31:0]                   drop_count
);

  typedef enum logic [1:0] {
    S_FILL    = 2'd0,
    S_ARMED   = 2'd1,
    S_READOUT = 2'd2
  } state_e;

  localparam logic [PTR_W-1:0] LAST_PTR = PTR_W'(DEPTH - 1);
  localparam logic [CH_W-1:0]  LAST_CH  = CH_W'(NUM_CH - 1);

  state_e state_q;

  logic [NUM_CH-1:0][WORD_W-1:0] mem [DEPTH];

  logic [PTR_W-1:0] wr_ptr_q, wr_ptr_next;
  logic [PTR_W:0]   fill_q;
  logic             wr_en;

  logic [PTR_W-1:0] rd_ptr_q;
  logic [PTR_W-1:0] beat_q;
  logic [CH_W-1:0]  rd_ch_q;
  logic             issuing_q;
  logic             rd_en;

  logic [NUM_CH-1:0][WORD_W-1:0] rd_word_q;
  logic [CH_W-1:0]               out_ch_q;
  logic                          out_last_q;
  logic                          out_valid_q;

  // ------------------------------------------------------------------
  // Write side
  // ------------------------------------------------------------------
  assign wr_en       = in_valid && (state_q != S_READOUT);
  assign wr_ptr_next = (wr_ptr_q == LAST_PTR) ? '0 : wr_ptr_q + 1'b1;

  always_ff @(posedge clk) begin
    if (wr_en) begin
      mem[wr_ptr_q] <= in_data;
    end
  end

  // ------------------------------------------------------------------
  // Read side: the read register is the output register of the stream
  // ------------------------------------------------------------------
  assign rd_en = (state_q == S_READOUT) && issuing_q &&
                 (!out_valid_q || m_axis_tready);

  always_ff @(posedge clk) begin
    if (rd_en) begin
      rd_word_q <= mem[rd_ptr_q];
    end
  end

  // ------------------------------------------------------------------
  // Control
  // ------------------------------------------------------------------
  always_ff @(posedge clk) begin
    if (rst) begin
      state_q       <= S_FILL;
      wr_ptr_q      <= '0;
      fill_q        <= '0;
      rd_ptr_q      <= '0;
      beat_q        <= '0;
      rd_ch_q       <= '0;
      issuing_q     <= 1'b0;
      out_ch_q      <= '0;
      out_last_q    <= 1'b0;
      out_valid_q   <= 1'b0;
      capture_count <= '0;
      drop_count    <= '0;
    end else begin
      if (wr_en) begin
        wr_ptr_q <= wr_ptr_next;
      end

      // output register handshake
      if (rd_en) begin
        out_valid_q <= 1'b1;
        out_ch_q    <= rd_ch_q;
        out_last_q  <= (beat_q == LAST_PTR);
      end else if (m_axis_tready) begin
        out_valid_q <= 1'b0;
      end

      unique case (state_q)
        S_FILL: begin
          if (wr_en) begin
            if (fill_q == (PTR_W+1)'(DEPTH - 1)) begin
              state_q <= S_ARMED;
            end
            fill_q <= fill_q + 1'b1;
          end
          if (trigger) drop_count <= drop_count + 1'b1;
        end

        S_ARMED: begin
          if (trigger) begin
            // Freeze: the word written in this cycle is the newest kept,
            // the oldest sits where the next write would have gone.
            state_q   <= S_READOUT;
            rd_ptr_q  <= wr_en ? wr_ptr_next : wr_ptr_q;
            beat_q    <= '0;
            rd_ch_q   <= '0;
            issuing_q <= 1'b1;
          end
        end

        S_READOUT: begin
          if (trigger) drop_count <= drop_count + 1'b1;
          if (rd_en) begin
            rd_ptr_q <= (rd_ptr_q == LAST_PTR) ? '0 : rd_ptr_q + 1'b1;
            if (beat_q == LAST_PTR) begin
              beat_q <= '0;
              if (rd_ch_q == LAST_CH) begin
                issuing_q <= 1'b0;
              end else begin
                rd_ch_q <= rd_ch_q + 1'b1;
              end
            end else begin
              beat_q <= beat_q + 1'b1;
            end
          end
          // Re-arm once the final beat has left
          if (!issuing_q && out_valid_q && m_axis_tready &&
              out_last_q && (out_ch_q == LAST_CH)) begin
            state_q       <= S_FILL;
            fill_q        <= '0;
            capture_count <= capture_count + 1'b1;
          end
        end

        default: state_q <= S_FILL;
      endcase
    end
  end

  assign m_axis_tvalid = out_valid_q;
  assign m_axis_tdata  = rd_word_q[out_ch_q];
  assign m_axis_tlast  = out_last_q;
  assign m_axis_tdest  = out_ch_q;
  assign busy          = (state_q == S_READOUT);
  assign armed         = (state_q == S_ARMED);

  // AXI-Stream rule: a beat offered and not taken stays unchanged.
  property p_axis_hold;
    @(posedge clk) disable iff (rst)
      (m_axis_tvalid && !m_axis_tready) |=>
        (m_axis_tvalid && $stable(m_axis_tdata) && $stable(m_axis_tlast) &&
         $stable(m_axis_tdest));
  endproperty
  a_axis_hold: assert property (p_axis_hold)
    else $error("ring_buffer: AXI-Stream beat changed while stalled");

endmodule
