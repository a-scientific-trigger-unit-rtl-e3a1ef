// els_core: pixel-preprocessing core of the ELS FPGA (everything but the
// PCI/AHB bridge; see els_fpga for the device top).
//
// Photons of the 80 x 80-pixel X/gamma camera arrive on 8 serial links.
// Each link passes an emulator (which can stand in for the camera) and a
// link control that deserialises 32-bit raw photons; a round-robin arbiter
// merges them into the raw photons buffer. Data processing takes the
// photons one by one, classifies them (energy band, energy strips, detector
// zone) and, as AHB master, writes each one into the CPU's SDRAM: the raw
// word into its link's raw-data ring, a 16-bit {pixel, band} word into the
// photon ring, and +1 into the pixel of the shadowgram of every strip the
// photon belongs to (read-modify-write, in the layer selected by the CPU).
// The SDRAM addresses come from the pointer RAM that the CPU loads. The
// 36 (strip, zone) photon counters and the 9 word counts are kept inside.
// Every time frame (FRAME_CYCLES cycles, 10 ms at 20 MHz) the time control
// ticks; the interrupt controller freezes the buffer readout, waits for the
// photon in flight, then interrupts the CPU, which reads counts and
// counters and acknowledges, unfreezing the readout. Every SWAP_FRAMES
// frames a second interrupt tells the CPU to swap the shadowgram layers.
// The CPU reaches the registers through the AHB slave port.
//
// Interface: all ports are synchronous to `clk` (the PCI clock). The PCI/AHB
// bridge is outside this module (els_fpga adds it): `ahbm_*` is the AHB
// master side that the bridge turns into PCI master writes/reads of SDRAM,
// `ahbs_*` the AHB slave side on which it delivers the CPU's PCI target
// accesses. `raw_*` is the raw photon stream for the SpaceWire FPGA.
//
// The block structure is that of the paper's firmware diagram and the data
// products and their sizes follow the paper; link framing, register and
// pointer maps, bus subset and buffer depths are this design's own.
module els_core
  import els_pkg::*;
#(
  parameter int unsigned FRAME_CYCLES  = 200000,
  parameter int unsigned SWAP_FRAMES   = 2048,
  parameter int unsigned RAW_BUF_DEPTH = 512,
  parameter int unsigned LINK_FIFO     = 4,
  parameter int unsigned CXG_DIV       = 2
) (
  input  logic         clk,
  input  logic         rst_n,
  // camera
  input  logic [7:0]   cxg_link,
  output logic         cxg_clk,
  output logic         cxg_top_frame,
  // CPU interrupts 0-1
  output logic [1:0]   cpu_irq,
  // raw photon stream
  output logic         raw_valid,
  output logic [2:0]   raw_link,
  output logic [31:0]  raw_data,
  // AHB master side of the PCI/AHB bridge
  output ahb_m2s_t     ahbm_o,
  input  ahb_s2m_t     ahbm_i,
  // AHB slave side of the PCI/AHB bridge
  input  ahb_m2s_t     ahbs_i,
  output ahb_s2m_t     ahbs_o
);
  cfg_t        cfg;
  logic [3:0]  ack;
  logic        sample;
  logic        reg_we, rp_a_we, rp_a_re;
  logic [5:0]  widx;
  logic [31:0] wdata, reg_rdata, rp_a_rdata, cnt_rdata, wc_rdata;

  logic        frame_tick, swap_tick, freeze, overrun;
  logic [1:0]  pending;
  logic [31:0] frame_count;

  logic [7:0]  emu_link, link_valid, link_pop, link_ovf;
  raw_photon_t link_data [N_LINKS];

  logic           arb_valid, raw_full, raw_empty, raw_ovf, raw_rd;
  tagged_photon_t arb_data, raw_head;
  logic [$clog2(RAW_BUF_DEPTH+1)-1:0] raw_level;

  logic        rp_b_re, rp_b_we;
  logic [5:0]  rp_b_addr;
  logic [31:0] rp_b_wdata, rp_b_rdata;
  logic        cnt_inc, proc_idle, bus_error;
  logic [3:0]  cnt_strips, cnt_zone;

  ahb_slave_access u_slave (
    .clk, .rst_n, .ahb_i(ahbs_i), .ahb_o(ahbs_o),
    .reg_we, .rp_we(rp_a_we), .rp_re(rp_a_re), .widx, .wdata,
    .reg_rdata, .rp_rdata(rp_a_rdata), .cnt_rdata, .wc_rdata
  );

  uts_control_status #(.FRAME_CYCLES(FRAME_CYCLES), .SWAP_FRAMES(SWAP_FRAMES), .CXG_DIV(CXG_DIV)) u_cs (
    .clk, .rst_n, .we(reg_we), .addr(widx), .wdata, .rdata(reg_rdata), .cfg, .ack,
    .frozen(pending[0]), .pending, .overrun, .raw_overflow(raw_ovf), .link_overflow(link_ovf),
    .bus_error, .frame_count, .frame_tick, .cxg_clk, .sample, .cxg_top_frame
  );

  uts_time_control u_time (
    .clk, .rst_n, .acq(cfg.acq), .frame_cycles(cfg.frame_cycles), .swap_frames(cfg.swap_frames),
    .frame_tick, .swap_tick, .frame_count
  );

  interrupt_controller u_irq (
    .clk, .rst_n, .frame_tick, .swap_tick, .proc_idle, .ack(ack[2:0]), .mask(cfg.irq_mask),
    .freeze, .pending, .overrun, .irq(cpu_irq)
  );

  for (genvar i = 0; i < N_LINKS; i++) begin : g_link
    cxg_link_emulator u_emu (
      .clk, .rst_n, .enable(cfg.emu_en[i]), .sample, .ext_link(cxg_link[i]),
      .word(cfg.emu_word), .period(cfg.emu_period), .link(emu_link[i])
    );
    cxg_link_control #(.FIFO_DEPTH(LINK_FIFO)) u_ctl (
      .clk, .rst_n, .enable(cfg.acq && cfg.link_en[i]), .sample, .link(emu_link[i]), .clear(ack[3]),
      .valid(link_valid[i]), .data(link_data[i]), .pop(link_pop[i]), .overflow(link_ovf[i])
    );
  end

  cxg_link_arbiter #(.N(N_LINKS)) u_arb (
    .clk, .rst_n, .in_valid(link_valid), .in_data(link_data), .in_pop(link_pop),
    .out_valid(arb_valid), .out_data(arb_data), .out_ready(!raw_full)
  );

  raw_photons_buffer #(.DEPTH(RAW_BUF_DEPTH)) u_rawbuf (
    .clk, .rst_n, .freeze, .clear(ack[3]), .wr(arb_valid), .wdata(arb_data), .full(raw_full),
    .rd(raw_rd), .rdata(raw_head), .empty(raw_empty), .level(raw_level), .overflow(raw_ovf)
  );

  ram_pointers u_rptr (
    .clk, .a_we(rp_a_we), .a_re(rp_a_re), .a_addr(widx), .a_wdata(wdata), .a_rdata(rp_a_rdata),
    .b_we(rp_b_we), .b_re(rp_b_re), .b_addr(rp_b_addr), .b_wdata(rp_b_wdata), .b_rdata(rp_b_rdata)
  );

  photon_counters u_cnt (
    .clk, .rst_n, .clear(ack[0]), .inc(cnt_inc), .strips(cnt_strips), .zone(cnt_zone),
    .rd_idx(widx), .rd_data(cnt_rdata)
  );

  data_processing u_proc (
    .clk, .rst_n, .acq(cfg.acq), .freeze, .layer(cfg.layer), .thr(cfg.thr), .strip_map(cfg.strip_map),
    .zone_x1(cfg.zone_x1), .zone_x2(cfg.zone_x2), .zone_y1(cfg.zone_y1), .zone_y2(cfg.zone_y2),
    .buf_empty(raw_empty), .buf_data(raw_head), .buf_rd(raw_rd),
    .rp_re(rp_b_re), .rp_we(rp_b_we), .rp_addr(rp_b_addr), .rp_wdata(rp_b_wdata), .rp_rdata(rp_b_rdata),
    .cnt_inc, .cnt_strips, .cnt_zone, .raw_valid, .raw_link, .raw_data,
    .clear(ack[0]), .wc_idx(widx), .wc_data(wc_rdata), .idle(proc_idle), .bus_error,
    .ahb_o(ahbm_o), .ahb_i(ahbm_i)
  );
endmodule
