// els_fpga: ELS FPGA of the GRB trigger unit (device top level).
//
// The pixel-preprocessing core (els_core: camera links, raw photons
// buffer, data processing, pointer RAM, counters, time and interrupt
// control, registers) joined to the PCI bus by the PCI/AHB bridge. The
// processor reaches the registers, pointer RAM and counters with PCI
// memory cycles in BAR0 (1 KB, register map as in els_pkg) after it has
// configured the bridge's header (BAR0 and the memory-space and
// bus-master bits). Data processing writes raw photons, photon words and
// shadowgram updates into the processor's SDRAM as PCI bus master. The two
// interrupt lines go straight to the processor, the raw photon stream
// to the SpaceWire FPGA.
//
// PCI pins are split into input, output and output enable; the board
// resolves them. Everything runs on `clk`, the PCI clock (20 MHz here).
module els_fpga
  import els_pkg::*;
#(
  parameter int unsigned FRAME_CYCLES  = 200000,
  parameter int unsigned SWAP_FRAMES   = 2048,
  parameter int unsigned RAW_BUF_DEPTH = 512,
  parameter int unsigned LINK_FIFO     = 4,
  parameter int unsigned CXG_DIV       = 2,
  parameter logic [31:0] PCI_ID        = 32'h0001_0001
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
  // PCI
  input  logic [31:0]  pci_ad_i,
  output logic [31:0]  pci_ad_o,
  output logic         pci_ad_oe,
  input  logic [3:0]   pci_cbe_i,
  output logic [3:0]   pci_cbe_o,
  output logic         pci_cbe_oe,
  output logic         pci_par_o,
  output logic         pci_par_oe,
  input  logic         pci_frame_n_i,
  output logic         pci_frame_n_o,
  output logic         pci_frame_oe,
  input  logic         pci_irdy_n_i,
  output logic         pci_irdy_n_o,
  output logic         pci_irdy_oe,
  input  logic         pci_trdy_n_i,
  input  logic         pci_devsel_n_i,
  input  logic         pci_stop_n_i,
  output logic         pci_trdy_n_o,
  output logic         pci_devsel_n_o,
  output logic         pci_stop_n_o,
  output logic         pci_trgt_oe,
  input  logic         pci_idsel,
  output logic         pci_req_n,
  input  logic         pci_gnt_n
);
  ahb_m2s_t ahbm_o, ahbs_i;
  ahb_s2m_t ahbm_i, ahbs_o;

  els_core #(
    .FRAME_CYCLES(FRAME_CYCLES), .SWAP_FRAMES(SWAP_FRAMES), .RAW_BUF_DEPTH(RAW_BUF_DEPTH),
    .LINK_FIFO(LINK_FIFO), .CXG_DIV(CXG_DIV)
  ) u_core (
    .clk, .rst_n, .cxg_link, .cxg_clk, .cxg_top_frame, .cpu_irq, .raw_valid, .raw_link, .raw_data,
    .ahbm_o, .ahbm_i, .ahbs_i, .ahbs_o
  );

  pci_ahb_bridge #(.PCI_ID(PCI_ID)) u_bridge (
    .clk, .rst_n,
    .ad_i(pci_ad_i), .ad_o(pci_ad_o), .ad_oe(pci_ad_oe),
    .cbe_i(pci_cbe_i), .cbe_o(pci_cbe_o), .cbe_oe(pci_cbe_oe),
    .par_o(pci_par_o), .par_oe(pci_par_oe),
    .frame_n_i(pci_frame_n_i), .frame_n_o(pci_frame_n_o), .frame_oe(pci_frame_oe),
    .irdy_n_i(pci_irdy_n_i), .irdy_n_o(pci_irdy_n_o), .irdy_oe(pci_irdy_oe),
    .trdy_n_i(pci_trdy_n_i), .devsel_n_i(pci_devsel_n_i), .stop_n_i(pci_stop_n_i),
    .trdy_n_o(pci_trdy_n_o), .devsel_n_o(pci_devsel_n_o), .stop_n_o(pci_stop_n_o),
    .trgt_oe(pci_trgt_oe), .idsel(pci_idsel), .req_n(pci_req_n), .gnt_n(pci_gnt_n),
    .m_o(ahbs_i), .m_i(ahbs_o),     // target side drives the core's slave port
    .s_i(ahbm_o), .s_o(ahbm_i)      // core's master port drives the PCI master
  );
endmodule
