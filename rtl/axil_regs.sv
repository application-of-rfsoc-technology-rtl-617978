// axil_regs -- firmware register block behind the AXI-Lite bus.
//
// The processing system reaches the firmware registers through an AXI4 to
// AXI-Lite bridge; this module is the AXI-Lite slave at the end of it. It holds
// the control registers (injection trigger enable and delay, DAC playback
// enables and loop length), turns a write to LIVE_REQ into a one-cycle request
// for the live display buffer, shows the status counters, and forwards writes
// in the DAC window to the playback memories. The register map is listed in
// bpm_pkg.
//
// Protocol: a write is taken in the cycle where both AWVALID and WVALID are
// high and no write response is pending (AWREADY = WREADY = 1 in that cycle);
// BVALID follows on the next cycle and holds until BREADY. A read is taken
// when ARVALID is high and no read data is pending; RVALID follows on the next
// cycle and holds until RREADY. Unmapped addresses answer SLVERR, reads of
// write-only locations return zero. WSTRB is ignored: every write is a full
// 32-bit write (the input stays on the port so the bus is complete, which is
// why a linter reports it unused). The paper says only that the firmware
// registers are mapped into the Linux memory space over AXI-Lite; the map,
// the handshake timing and the error responses are this design's choices.
module axil_regs
  import bpm_pkg::*;
#(
  parameter int unsigned MEM_DEPTH = bpm_pkg::DAC_DEPTH,
  parameter int unsigned MEM_SPC   = bpm_pkg::DAC_SPC,
  localparam int unsigned DAC_PAIRS = MEM_DEPTH * MEM_SPC / 2,
  localparam int unsigned PAIR_W    = $clog2(DAC_PAIRS),
  localparam int unsigned DPTR_W    = (MEM_DEPTH > 1) ? $clog2(MEM_DEPTH) : 1
) (
  input  logic                    clk,
  input  logic                    rst,
  // AXI-Lite slave
  input  logic [AXIL_ADDR_W-1:0]  s_axil_awaddr,
  input  logic                    s_axil_awvalid,
  output logic                    s_axil_awready,
  input  logic [AXIL_DATA_W-1:0]  s_axil_wdata,
  input  logic [3:0]              s_axil_wstrb,
  input  logic                    s_axil_wvalid,
  output logic                    s_axil_wready,
  output logic [1:0]              s_axil_bresp,
  output logic                    s_axil_bvalid,
  input  logic                    s_axil_bready,
  input  logic [AXIL_ADDR_W-1:0]  s_axil_araddr,
  input  logic                    s_axil_arvalid,
  output logic                    s_axil_arready,
  output logic [AXIL_DATA_W-1:0]  s_axil_rdata,
  output logic [1:0]              s_axil_rresp,
  output logic                    s_axil_rvalid,
  input  logic                    s_axil_rready,
  // control outputs
  output control_t                control,
  output logic [TRIG_DELAY_W-1:0] trig_delay,
  output logic                    live_req,
  output logic [DPTR_W-1:0]       dac_last_word,
  output logic                    dac_wr_en,
  output logic                    dac_wr_ch,
  output logic [PAIR_W-1:0]       dac_wr_pair,
  output logic [31:0]             dac_wr_data,
  // status inputs
  input  logic [31:0]             trig_count,
  input  logic [31:0]             trig_ignored,
  input  logic                    inj_busy,
  input  logic                    live_busy,
  input  logic                    inj_armed,
  input  logic                    live_armed,
  input  logic [31:0]             inj_frames,
  input  logic [31:0]             live_frames,
  input  logic [31:0]             inj_drops,
  input  logic [31:0]             live_drops
);

  localparam logic [1:0] RESP_OKAY   = 2'b00;
  localparam logic [1:0] RESP_SLVERR = 2'b10;

  localparam int unsigned WIN_BIT = 16;   // DAC window select
  localparam int unsigned CH_BIT  = 15;   // DAC channel select

  logic [31:0] scratch_q;
  logic        wr_take, rd_take;
  logic        aw_is_dac, ar_is_dac;
  logic [7:0]  aw_reg, ar_reg;
  logic [PAIR_W-1:0] aw_pair;
  logic        aw_pair_ok;

  // Write channel ----------------------------------------------------
  assign wr_take        = s_axil_awvalid && s_axil_wvalid && !s_axil_bvalid;
  assign s_axil_awready = wr_take;
  assign s_axil_wready  = wr_take;

  assign aw_is_dac  = s_axil_awaddr[WIN_BIT];
  assign aw_reg     = s_axil_awaddr[7:0];
  assign aw_pair    = PAIR_W'(s_axil_awaddr[CH_BIT-1:2]);
  assign aw_pair_ok = (s_axil_awaddr[CH_BIT-1:2] < (CH_BIT-2)'(DAC_PAIRS));

  always_ff @(posedge clk) begin
    if (rst) begin
      control       <= '0;
      trig_delay    <= '0;
      dac_last_word <= '0;
      scratch_q     <= '0;
      live_req      <= 1'b0;
      dac_wr_en     <= 1'b0;
      dac_wr_ch     <= 1'b0;
      dac_wr_pair   <= '0;
      dac_wr_data   <= '0;
      s_axil_bvalid <= 1'b0;
      s_axil_bresp  <= RESP_OKAY;
    end else begin
      live_req  <= 1'b0;
      dac_wr_en <= 1'b0;
      if (s_axil_bvalid && s_axil_bready) begin
        s_axil_bvalid <= 1'b0;
      end
      if (wr_take) begin
        s_axil_bvalid <= 1'b1;
        s_axil_bresp  <= RESP_OKAY;
        if (aw_is_dac) begin
          if (aw_pair_ok) begin
            dac_wr_en   <= 1'b1;
            dac_wr_ch   <= s_axil_awaddr[CH_BIT];
            dac_wr_pair <= aw_pair;
            dac_wr_data <= s_axil_wdata;
          end else begin
            s_axil_bresp <= RESP_SLVERR;
          end
        end else if (s_axil_awaddr[WIN_BIT-1:8] != '0) begin
          s_axil_bresp <= RESP_SLVERR;
        end else begin
          unique case (aw_reg)
            REG_SCRATCH:    scratch_q     <= s_axil_wdata;
            REG_CONTROL:    control       <= control_t'(s_axil_wdata[2:0]);
            REG_TRIG_DELAY: trig_delay    <= s_axil_wdata[TRIG_DELAY_W-1:0];
            REG_LIVE_REQ:   live_req      <= s_axil_wdata[0];
            REG_DAC_LEN:    dac_last_word <= s_axil_wdata[DPTR_W-1:0];
            REG_ID, REG_TRIG_COUNT, REG_TRIG_IGNORED, REG_STATUS,
            REG_INJ_FRAMES, REG_LIVE_FRAMES, REG_INJ_DROPS, REG_LIVE_DROPS: ;  // read-only: write ignored
            default:        s_axil_bresp  <= RESP_SLVERR;
          endcase
        end
      end
    end
  end

  // Read channel -----------------------------------------------------
  assign rd_take        = s_axil_arvalid && !s_axil_rvalid;
  assign s_axil_arready = rd_take;
  assign ar_is_dac      = s_axil_araddr[WIN_BIT];
  assign ar_reg         = s_axil_araddr[7:0];

  always_ff @(posedge clk) begin
    if (rst) begin
      s_axil_rvalid <= 1'b0;
      s_axil_rdata  <= '0;
      s_axil_rresp  <= RESP_OKAY;
    end else begin
      if (s_axil_rvalid && s_axil_rready) begin
        s_axil_rvalid <= 1'b0;
      end
      if (rd_take) begin
        s_axil_rvalid <= 1'b1;
        s_axil_rdata  <= '0;
        s_axil_rresp  <= RESP_OKAY;
        if (ar_is_dac) begin
          // DAC window is write-only
          s_axil_rdata <= '0;
        end else if (s_axil_araddr[WIN_BIT-1:8] != '0) begin
          s_axil_rresp <= RESP_SLVERR;
        end else begin
          unique case (ar_reg)
            REG_ID:           s_axil_rdata <= REG_ID_VALUE;
            REG_SCRATCH:      s_axil_rdata <= scratch_q;
            REG_CONTROL:      s_axil_rdata <= 32'(control);
            REG_TRIG_DELAY:   s_axil_rdata <= 32'(trig_delay);
            REG_LIVE_REQ:     s_axil_rdata <= '0;
            REG_DAC_LEN:      s_axil_rdata <= 32'(dac_last_word);
            REG_TRIG_COUNT:   s_axil_rdata <= trig_count;
            REG_TRIG_IGNORED: s_axil_rdata <= trig_ignored;
            REG_STATUS:       s_axil_rdata <= {28'd0, live_armed, inj_armed,
                                                 live_busy, inj_busy};
            REG_INJ_FRAMES:   s_axil_rdata <= inj_frames;
            REG_LIVE_FRAMES:  s_axil_rdata <= live_frames;
            REG_INJ_DROPS:    s_axil_rdata <= inj_drops;
            REG_LIVE_DROPS:   s_axil_rdata <= live_drops;
            default:          s_axil_rresp <= RESP_SLVERR;
          endcase
        end
      end
    end
  end

  // AXI rule: a response stays until it is taken.
  a_b_hold: assert property (@(posedge clk) disable iff (rst)
      (s_axil_bvalid && !s_axil_bready) |=> (s_axil_bvalid && $stable(s_axil_bresp)))
    else $error("axil_regs: write response dropped before BREADY");
  a_r_hold: assert property (@(posedge clk) disable iff (rst)
      (s_axil_rvalid && !s_axil_rready) |=> (s_axil_rvalid && $stable(s_axil_rdata)))
    else $error("axil_regs: read data changed before RREADY");

endmodule
