// uts_control_status: configuration/status registers and camera timing.
//
// Register file written and read by the CPU through the AHB slave access
// (word index `addr`, write strobe `we`, combinational read `rdata`). It
// holds the acquisition-mode bit, the shadowgram layer the FPGA fills, link
// and emulator enables, the classification settings (band thresholds,
// band-to-strip map, zone grid), the frame length, the swap period and the
// interrupt mask, and it reports status. Writing R_IRQ_ACK produces
// one-cycle pulses: bit 0 acknowledges the time-frame interrupt (unfreeze,
// clear counters and word counts), bit 1 the swap interrupt, bit 2 clears
// the overrun flag, bit 3 the overflow flags. Register map (word index):
//   0 CTRL       [0] acq  [1] layer  [15:8] link_en  [23:16] emu_en
//   1 STATUS     [0] frozen [2:1] irq pending [3] overrun [4] raw buffer
//                overflow [5] AHB error response [15:8] link overflow (read only)
//   2 IRQ_ACK    write-one pulses as above
//   3 IRQ_MASK   [1:0]
//   4..7 THR     band thresholds, two 12-bit fields per word ([11:0], [27:16])
//   8 STRIP_MAP  4 bits per band
//   9 ZONE_X / 10 ZONE_Y  [6:0] first bound, [14:8] second bound
//  11 FRAME_CYC  12 SWAP_FRAMES  13 FRAME_COUNT (ro)  14 EMU_WORD
//  15 EMU_PERIOD
// It also drives the camera: `cxg_clk` is the PCI clock divided by CXG_DIV,
// `sample` flags the PCI cycle of each CXG clock rising edge, and
// `cxg_top_frame` is a pulse one CXG clock long at each time frame.
//
// That the CPU sets the configuration, switches acquisition mode, and that
// CXG Clock and CXG Top Frame leave this block, follows the paper; the
// register map, reset values and clock ratio are this design's own.
module uts_control_status
  import els_pkg::*;
#(
  parameter int unsigned FRAME_CYCLES = 200000,
  parameter int unsigned SWAP_FRAMES  = 2048,
  parameter int unsigned CXG_DIV      = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        we,
  input  logic [5:0]  addr,
  input  logic [31:0] wdata,
  output logic [31:0] rdata,
  output cfg_t        cfg,
  output logic [3:0]  ack,
  input  logic        frozen,
  input  logic [1:0]  pending,
  input  logic        overrun,
  input  logic        raw_overflow,
  input  logic [7:0]  link_overflow,
  input  logic        bus_error,
  input  logic [31:0] frame_count,
  input  logic        frame_tick,
  output logic        cxg_clk,
  output logic        sample,
  output logic        cxg_top_frame
);
  localparam int unsigned HALF = (CXG_DIV >= 2) ? CXG_DIV / 2 : 1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg.acq          <= 1'b0;
      cfg.layer        <= 1'b0;
      cfg.link_en      <= '0;
      cfg.emu_en       <= '0;
      for (int i = 0; i < 7; i++) cfg.thr[i] <= 12'((i + 1) * 512);
      // strip 0: all bands; 1: bands 0-3; 2: bands 2-5; 3: bands 4-7
      cfg.strip_map    <= {4'b1001, 4'b1001, 4'b1101, 4'b1101, 4'b0111, 4'b0111, 4'b0011, 4'b0011};
      cfg.zone_x1      <= 7'd27;
      cfg.zone_x2      <= 7'd54;
      cfg.zone_y1      <= 7'd27;
      cfg.zone_y2      <= 7'd54;
      cfg.frame_cycles <= 32'(FRAME_CYCLES);
      cfg.swap_frames  <= 16'(SWAP_FRAMES);
      cfg.emu_word     <= '0;
      cfg.emu_period   <= 16'd64;
      cfg.irq_mask     <= 2'b11;
      ack              <= '0;
    end else begin
      ack <= '0;
      if (we) begin
        unique case (addr)
          R_CTRL: begin
            cfg.acq     <= wdata[0];
            cfg.layer   <= wdata[1];
            cfg.link_en <= wdata[15:8];
            cfg.emu_en  <= wdata[23:16];
          end
          R_IRQ_ACK:     ack <= wdata[3:0];
          R_IRQ_MASK:    cfg.irq_mask <= wdata[1:0];
          R_THR01:       begin cfg.thr[0] <= wdata[11:0]; cfg.thr[1] <= wdata[27:16]; end
          R_THR23:       begin cfg.thr[2] <= wdata[11:0]; cfg.thr[3] <= wdata[27:16]; end
          R_THR45:       begin cfg.thr[4] <= wdata[11:0]; cfg.thr[5] <= wdata[27:16]; end
          R_THR6:        cfg.thr[6] <= wdata[11:0];
          R_STRIP_MAP:   cfg.strip_map <= wdata;
          R_ZONE_X:      begin cfg.zone_x1 <= wdata[6:0]; cfg.zone_x2 <= wdata[14:8]; end
          R_ZONE_Y:      begin cfg.zone_y1 <= wdata[6:0]; cfg.zone_y2 <= wdata[14:8]; end
          R_FRAME_CYC:   cfg.frame_cycles <= wdata;
          R_SWAP_FRAMES: cfg.swap_frames <= wdata[15:0];
          R_EMU_WORD:    cfg.emu_word <= wdata;
          R_EMU_PERIOD:  cfg.emu_period <= wdata[15:0];
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    rdata = '0;
    unique case (addr)
      R_CTRL:        rdata = {8'd0, cfg.emu_en, cfg.link_en, 6'd0, cfg.layer, cfg.acq};
      R_STATUS:      rdata = {16'd0, link_overflow, 2'd0, bus_error, raw_overflow, overrun, pending, frozen};
      R_IRQ_MASK:    rdata = {30'd0, cfg.irq_mask};
      R_THR01:       rdata = {4'd0, cfg.thr[1], 4'd0, cfg.thr[0]};
      R_THR23:       rdata = {4'd0, cfg.thr[3], 4'd0, cfg.thr[2]};
      R_THR45:       rdata = {4'd0, cfg.thr[5], 4'd0, cfg.thr[4]};
      R_THR6:        rdata = {20'd0, cfg.thr[6]};
      R_STRIP_MAP:   rdata = cfg.strip_map;
      R_ZONE_X:      rdata = {17'd0, cfg.zone_x2, 1'b0, cfg.zone_x1};
      R_ZONE_Y:      rdata = {17'd0, cfg.zone_y2, 1'b0, cfg.zone_y1};
      R_FRAME_CYC:   rdata = cfg.frame_cycles;
      R_SWAP_FRAMES: rdata = {16'd0, cfg.swap_frames};
      R_FRAME_COUNT: rdata = frame_count;
      R_EMU_WORD:    rdata = cfg.emu_word;
      R_EMU_PERIOD:  rdata = {16'd0, cfg.emu_period};
      default:       rdata = '0;
    endcase
  end

  // Camera clock and top-frame pulse.
  logic [$clog2(HALF+1)-1:0] div;
  logic [$clog2(CXG_DIV+2)-1:0] tf_cnt;
  logic wrap;
  assign wrap   = (div == $bits(div)'(HALF - 1));
  assign sample = wrap && !cxg_clk;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div <= '0; cxg_clk <= 1'b0; tf_cnt <= '0;
    end else begin
      div <= wrap ? '0 : div + 1'b1;
      if (wrap) cxg_clk <= !cxg_clk;
      if (frame_tick)       tf_cnt <= $bits(tf_cnt)'(CXG_DIV);
      else if (tf_cnt != 0) tf_cnt <= tf_cnt - 1'b1;
    end
  end
  assign cxg_top_frame = (tf_cnt != 0);
endmodule
