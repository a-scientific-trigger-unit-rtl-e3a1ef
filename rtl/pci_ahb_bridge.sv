// pci_ahb_bridge: PCI/AHB bridge of the ELS FPGA (simplified PCI 2.x core).
//
// Target side: the processor's PCI accesses reach the FPGA here and leave
// as AHB-Lite transfers on `m_o/m_i` (towards the AHB slave access).
// Type-0 configuration cycles (IDSEL) reach a minimal header: ID word
// (offset 0x00), command/status (0x04: bit 1 memory space, bit 2 bus
// master enable; status reports fast DEVSEL timing) and BAR0 (0x10), a
// 1 KB non-prefetchable memory window. Memory read/write cycles that hit
// BAR0 claim the bus with fast DEVSEL#. A write is captured when IRDY#
// is asserted and forwarded to AHB; a read waits for the AHB read. TRDY#
// is asserted once the AHB transfer has completed. Every target transfer
// carries one data phase: STOP# is asserted together with TRDY#
// (disconnect with data), so a burst is split into single transfers.
//
// Master side: an AHB-Lite transfer from data processing on `s_i/s_o`
// becomes a single-data-phase PCI memory read (0110) or write (0111):
// REQ#, wait for GNT# and an idle bus, address phase, one data phase with
// byte enables from HSIZE/HADDR, then the bus is released. A target retry
// (STOP# without TRDY#) repeats the cycle. Writes are posted: the AHB
// data phase ends as soon as the write data has been captured (unless the
// next address phase is already waiting), and the PCI write runs in the
// background; a following transfer waits for it, so order is kept. A read
// holds HREADY low until its PCI cycle has completed. No DEVSEL# within 5
// clocks (master abort) ends a read with an AHB ERROR response and drops
// a posted write; with bus mastering disabled every transfer gets ERROR.
//
// PAR is generated one clock after each phase this bridge drives AD in.
// Received parity is not checked, and PERR#/SERR#, LOCK#, 64-bit
// extensions, bursts and byte-enable-selective target writes (target
// writes are whole words) are not implemented. Tristate pins are split
// into _i, _o and _oe; s/t/s signals are driven high for one clock before
// release.
//
// The bridge's place between the AHB bus and the PCI bus, and its two
// roles (the CPU's PCI master cycles decoded as AHB slave accesses, AHB
// master cycles resulting in PCI and then memory cycles), are what the
// source describes. All the rest above is this design's own minimal PCI
// core.
module pci_ahb_bridge
  import els_pkg::*;
#(
  parameter logic [31:0] PCI_ID = 32'h0001_0001   // device/vendor ID (placeholder)
) (
  input  logic        clk,
  input  logic        rst_n,
  // PCI
  input  logic [31:0] ad_i,
  output logic [31:0] ad_o,
  output logic        ad_oe,
  input  logic [3:0]  cbe_i,
  output logic [3:0]  cbe_o,
  output logic        cbe_oe,
  output logic        par_o,
  output logic        par_oe,
  input  logic        frame_n_i,
  output logic        frame_n_o,
  output logic        frame_oe,
  input  logic        irdy_n_i,
  output logic        irdy_n_o,
  output logic        irdy_oe,
  input  logic        trdy_n_i,
  input  logic        devsel_n_i,
  input  logic        stop_n_i,
  output logic        trdy_n_o,
  output logic        devsel_n_o,
  output logic        stop_n_o,
  output logic        trgt_oe,
  input  logic        idsel,
  output logic        req_n,
  input  logic        gnt_n,
  // AHB master side (PCI target accesses towards the FPGA registers)
  output ahb_m2s_t    m_o,
  input  ahb_s2m_t    m_i,
  // AHB slave side (FPGA data towards PCI memory)
  input  ahb_m2s_t    s_i,
  output ahb_s2m_t    s_o
);
  localparam logic [3:0] CMD_MEM_RD = 4'b0110, CMD_MEM_WR = 4'b0111;
  localparam logic [3:0] CMD_CFG_RD = 4'b1010, CMD_CFG_WR = 4'b1011;

  // ---------------------------------------------------------------- config
  logic        mem_en, bm_en;
  logic [21:0] bar0;        // BAR0 bits [31:10]

  // ---------------------------------------------------------------- target
  typedef enum logic [2:0] {T_IDLE, T_CFG, T_MEM_W, T_AHB, T_XFER, T_HOLD, T_TURN} tstate_e;
  tstate_e     ts;
  logic        frame_q;          // FRAME# of the previous clock (1 = deasserted)
  logic        t_write, t_cfg, t_issued;
  logic [31:0] t_addr, t_data;
  logic        tc_valid, tc_ready, tc_done, tc_err;
  logic [31:0] tc_rdata;
  logic        own_cycle;        // this bridge is the master of the current cycle
  logic        addr_phase;

  assign addr_phase = !frame_n_i && frame_q && !own_cycle;

  function automatic logic [31:0] cfg_read(input logic [5:0] r);
    unique case (r)
      6'd0:    return PCI_ID;
      6'd1:    return {16'h0000, 13'd0, bm_en, mem_en, 1'b0};
      6'd4:    return {bar0, 10'd0};
      default: return '0;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ts <= T_IDLE; frame_q <= 1'b1; t_issued <= 1'b0; t_write <= 1'b0; t_cfg <= 1'b0; t_addr <= '0; t_data <= '0;
      mem_en <= 1'b0; bm_en <= 1'b0; bar0 <= '0;
    end else begin
      frame_q <= frame_n_i;
      if (tc_valid) t_issued <= 1'b1;
      unique case (ts)
        T_IDLE: if (addr_phase) begin
          t_addr <= ad_i;
          if ((cbe_i == CMD_CFG_RD || cbe_i == CMD_CFG_WR) && idsel && ad_i[1:0] == 2'b00) begin
            t_cfg   <= 1'b1;
            t_write <= (cbe_i == CMD_CFG_WR);
            ts      <= T_CFG;
          end else if ((cbe_i == CMD_MEM_RD || cbe_i == CMD_MEM_WR) && mem_en && ad_i[31:10] == bar0) begin
            t_cfg   <= 1'b0;
            t_write <= (cbe_i == CMD_MEM_WR);
            ts      <= (cbe_i == CMD_MEM_WR) ? T_MEM_W : T_AHB;
          end
        end
        T_CFG: begin
          t_data <= cfg_read(t_addr[7:2]);
          ts     <= T_XFER;
        end
        T_MEM_W: if (!irdy_n_i) begin
          t_data <= ad_i;
          ts     <= T_AHB;
        end
        T_AHB: if (tc_done) begin
          t_issued <= 1'b0;
          if (!t_write) t_data <= tc_rdata;
          ts <= T_XFER;
        end
        T_XFER: if (!irdy_n_i) begin
          if (t_cfg && t_write) begin
            unique case (t_addr[7:2])
              6'd1: begin mem_en <= ad_i[1]; bm_en <= ad_i[2]; end
              6'd4: bar0 <= ad_i[31:10];
              default: ;
            endcase
          end
          ts <= frame_n_i ? T_TURN : T_HOLD;
        end
        T_HOLD: if (frame_n_i) ts <= T_TURN;
        T_TURN: ts <= T_IDLE;
        default: ts <= T_IDLE;
      endcase
    end
  end

  // the AHB transfer of a memory target cycle (the error response of the
  // FPGA slave is never used: it always answers OKAY)
  assign tc_valid = (ts == T_AHB) && tc_ready && !t_issued;
  ahb_master_port u_tmst (
    .clk, .rst_n, .cmd_valid(tc_valid), .cmd_ready(tc_ready), .cmd_addr({22'd0, t_addr[9:2], 2'b00}),
    .cmd_write(t_write), .cmd_size(HSIZE_WORD), .cmd_wdata(t_data),
    .done(tc_done), .err(tc_err), .rdata(tc_rdata), .ahb_o(m_o), .ahb_i(m_i)
  );

  // ---------------------------------------------------------------- master
  typedef enum logic [2:0] {M_IDLE, M_REQ, M_ADDR, M_DATA, M_END, M_RESP, M_ERR1, M_ERR2} mstate_e;
  mstate_e     ms;
  logic        m_write, m_cap, m_retry, m_posted, post_now;
  logic [31:0] m_addr, m_wdata, m_rdata;
  logic [3:0]  m_be_n;
  logic [2:0]  m_wait;
  logic        s_accept;

  assign s_accept = s_i.htrans[1] && s_o.hready;
  assign post_now = (ms == M_REQ) && m_cap && !s_i.htrans[1];
  assign own_cycle = (ms == M_ADDR) || (ms == M_DATA) || (ms == M_END);

  function automatic logic [3:0] be_n(input logic [2:0] size, input logic [1:0] a);
    unique case (size)
      3'b000:  return ~(4'b0001 << a);
      3'b001:  return a[1] ? 4'b0011 : 4'b1100;
      default: return 4'b0000;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ms <= M_IDLE; m_write <= 1'b0; m_cap <= 1'b0; m_retry <= 1'b0; m_posted <= 1'b0; m_addr <= '0; m_wdata <= '0;
      m_rdata <= '0; m_be_n <= '0; m_wait <= '0;
    end else begin
      if (m_cap) begin
        m_wdata <= s_i.hwdata;    // first cycle of the AHB data phase
        m_cap   <= 1'b0;
      end
      if (post_now) m_posted <= 1'b1;
      unique case (ms)
        M_IDLE, M_RESP, M_ERR2: begin
          if (s_accept) begin
            m_addr  <= s_i.haddr;
            m_write <= s_i.hwrite;
            m_be_n  <= be_n(s_i.hsize, s_i.haddr[1:0]);
            m_cap   <= s_i.hwrite;
            m_posted <= 1'b0;
            ms      <= bm_en ? M_REQ : M_ERR1;
          end else begin
            ms <= M_IDLE;
          end
        end
        M_REQ: if (!gnt_n && frame_n_i && irdy_n_i && ts == T_IDLE && !m_cap) ms <= M_ADDR;
        M_ADDR: begin m_wait <= '0; m_retry <= 1'b0; ms <= M_DATA; end
        M_DATA: begin
          m_wait <= m_wait + 1'b1;
          if (!trdy_n_i && !devsel_n_i) begin
            if (!m_write) m_rdata <= ad_i;
            ms <= M_END;
          end else if (!stop_n_i && !devsel_n_i) begin
            m_retry <= 1'b1;
            ms      <= M_END;
          end else if (devsel_n_i && m_wait == 3'd5) begin
            ms <= m_posted ? M_IDLE : M_ERR1;    // master abort
          end
        end
        M_END: ms <= m_retry ? M_REQ : m_posted ? M_IDLE : M_RESP;
        M_ERR1: ms <= M_ERR2;
        default: ms <= M_IDLE;
      endcase
    end
  end

  assign req_n = !(ms == M_REQ);

  assign s_o.hready = (ms == M_IDLE) || (ms == M_RESP) || (ms == M_ERR2) || post_now;
  assign s_o.hresp  = (ms == M_ERR1) || (ms == M_ERR2);
  assign s_o.hrdata = (ms == M_RESP) ? m_rdata : '0;

  // ---------------------------------------------------------------- pins
  always_comb begin
    frame_oe = 1'b0; frame_n_o = 1'b1; irdy_oe = 1'b0; irdy_n_o = 1'b1;
    ad_oe = 1'b0; ad_o = '0; cbe_oe = 1'b0; cbe_o = '0;
    trgt_oe = 1'b0; trdy_n_o = 1'b1; devsel_n_o = 1'b1; stop_n_o = 1'b1;
    unique case (ms)
      M_ADDR: begin
        frame_oe = 1'b1; frame_n_o = 1'b0; irdy_oe = 1'b1;
        ad_oe = 1'b1; ad_o = {m_addr[31:2], 2'b00};
        cbe_oe = 1'b1; cbe_o = m_write ? CMD_MEM_WR : CMD_MEM_RD;
      end
      M_DATA: begin
        frame_oe = 1'b1; irdy_oe = 1'b1; irdy_n_o = 1'b0;
        ad_oe = m_write; ad_o = m_wdata;
        cbe_oe = 1'b1; cbe_o = m_be_n;
      end
      M_END: begin frame_oe = 1'b1; irdy_oe = 1'b1; end
      default: ;
    endcase
    unique case (ts)
      T_CFG, T_MEM_W, T_AHB: begin trgt_oe = 1'b1; devsel_n_o = 1'b0; end
      T_XFER: begin
        trgt_oe = 1'b1; devsel_n_o = 1'b0; trdy_n_o = 1'b0; stop_n_o = 1'b0;
        ad_oe = !t_write; ad_o = t_write ? '0 : t_data;
      end
      T_HOLD: begin trgt_oe = 1'b1; devsel_n_o = 1'b0; stop_n_o = 1'b0; end
      T_TURN: trgt_oe = 1'b1;
      default: ;
    endcase
  end

  // parity of the previous clock's AD/CBE, driven by whoever drove AD
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      par_o <= 1'b0; par_oe <= 1'b0;
    end else begin
      par_oe <= ad_oe;
      par_o  <= ^ad_o ^ ^(cbe_oe ? cbe_o : cbe_i);
    end
  end
endmodule
