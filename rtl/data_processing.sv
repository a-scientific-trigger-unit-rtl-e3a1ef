// data_processing: "Data Processing & Routing / AHB Master Access".
//
// Takes one photon at a time from the raw photons buffer (never while
// `freeze` is high or acquisition is off), classifies it, and routes it:
//   1. the 32-bit raw photon is streamed out (CXG raw data) and written to
//      the raw-data ring of its link in SDRAM;
//   2. the 16-bit preprocessed photon {pixel, band} is written to the photon
//      ring (halfword transfer, replicated on both halves of HWDATA);
//   3. for every energy strip the photon belongs to, the shadowgram word of
//      its pixel in the layer being filled is read, incremented and written
//      back (read-modify-write);
//   4. the (strip, zone) counters are incremented.
// For each ring the current write pointer, the end and the base are read
// from the pointer RAM (one word per cycle, data the next cycle); the
// pointer is advanced by the datum size and wrapped to the base when it
// reaches the end, and written back. The shadowgram word address is
// shadow_base[layer][strip] + 4*pixel. Word counts of the 8 raw rings and
// of the photon ring count the data written since the last interrupt
// acknowledge (`clear`). `idle` tells the interrupt controller that no
// photon is in flight.
//
// Timing with a zero-wait-state bus: 1 cycle to take the photon, 7 per ring
// write (3 pointer reads, pointer write-back with command issue, address
// phase, data phase, completion) and 9 per strip (pointer read, read
// transfer in 4, write transfer in 4), i.e. 15 + 9 x strips cycles per
// photon: 24 to 51 cycles, 390 000 to 830 000 photons/s at 20 MHz. Each
// bus wait state adds one cycle.
//
// The routing (raw rings per link, one photon ring, one shadowgram per
// strip in a double-buffered SDRAM area filled by read-modify-write,
// pointers looked up in the RAM pointer area, word counts) follows the
// paper; the order of the steps and the wrap rule are this design's own.
module data_processing
  import els_pkg::*;
(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           acq,
  input  logic           freeze,
  input  logic           layer,
  input  logic [6:0][11:0] thr,
  input  logic [7:0][3:0]  strip_map,
  input  logic [6:0]     zone_x1,
  input  logic [6:0]     zone_x2,
  input  logic [6:0]     zone_y1,
  input  logic [6:0]     zone_y2,
  // raw photons buffer (first-word-fall-through)
  input  logic           buf_empty,
  input  tagged_photon_t buf_data,
  output logic           buf_rd,
  // pointer RAM port B
  output logic           rp_re,
  output logic           rp_we,
  output logic [5:0]     rp_addr,
  output logic [31:0]    rp_wdata,
  input  logic [31:0]    rp_rdata,
  // photon counters
  output logic           cnt_inc,
  output logic [3:0]     cnt_strips,
  output logic [3:0]     cnt_zone,
  // CXG raw data stream
  output logic           raw_valid,
  output logic [2:0]     raw_link,
  output logic [31:0]    raw_data,
  // word counts
  input  logic           clear,
  input  logic [5:0]     wc_idx,
  output logic [31:0]    wc_data,
  output logic           idle,
  output logic           bus_error,
  // AHB master
  output ahb_m2s_t       ahb_o,
  input  ahb_s2m_t       ahb_i
);
  typedef enum logic [3:0] {
    P_IDLE, P_RD_CUR, P_RD_END, P_RD_BASE, P_RING_WR, P_RING_WAIT,
    P_SH_RD, P_SH_ADDR, P_SH_RWAIT, P_SH_WRITE, P_SH_WWAIT
  } pstate_e;

  pstate_e        st;
  tagged_photon_t ph_q;
  class_t         cls, cls_q;
  prep_photon_t   prep, prep_q;
  logic           layer_q;
  logic           ring_ph;     // 0: raw ring of the link, 1: photon ring
  logic [31:0]    cur_q, end_q, next_ptr;
  logic [3:0]     left;        // strips still to update
  logic [1:0]     s_cur;
  logic [31:0]    sh_addr_q, sh_data_q;
  logic [31:0]    wc [N_WC];

  // master port command
  logic        cmd_valid, cmd_ready, cmd_write, m_done, m_err;
  logic [31:0] cmd_addr, cmd_wdata, m_rdata;
  logic [2:0]  cmd_size;

  photon_classifier u_cls (
    .ph(buf_data.ph), .thr, .strip_map, .zone_x1, .zone_x2, .zone_y1, .zone_y2,
    .cls, .prep
  );

  ahb_master_port u_mst (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_addr, .cmd_write, .cmd_size, .cmd_wdata,
    .done(m_done), .err(m_err), .rdata(m_rdata), .ahb_o, .ahb_i
  );

  logic [5:0] idx_cur, idx_end, idx_base;
  assign idx_cur  = ring_ph ? RP_PH_CUR  : RP_RAW_CUR  + 6'(ph_q.link);
  assign idx_end  = ring_ph ? RP_PH_END  : RP_RAW_END  + 6'(ph_q.link);
  assign idx_base = ring_ph ? RP_PH_BASE : RP_RAW_BASE + 6'(ph_q.link);

  // lowest strip still to update
  always_comb begin
    s_cur = '0;
    for (int s = 3; s >= 0; s--) if (left[s]) s_cur = 2'(s);
  end

  assign next_ptr = cur_q + (ring_ph ? 32'd2 : 32'd4);

  always_comb begin
    buf_rd = 1'b0; rp_re = 1'b0; rp_we = 1'b0; rp_addr = idx_cur; rp_wdata = '0;
    cmd_valid = 1'b0; cmd_addr = cur_q; cmd_write = 1'b1; cmd_size = HSIZE_WORD; cmd_wdata = ph_q.ph;
    unique case (st)
      P_IDLE:    buf_rd = acq && !freeze && !buf_empty;
      P_RD_CUR:  begin rp_re = 1'b1; rp_addr = idx_cur;  end
      P_RD_END:  begin rp_re = 1'b1; rp_addr = idx_end;  end
      P_RD_BASE: begin rp_re = 1'b1; rp_addr = idx_base; end
      P_RING_WR: begin
        rp_we     = 1'b1;
        rp_addr   = idx_cur;
        rp_wdata  = (next_ptr >= end_q) ? rp_rdata : next_ptr;
        cmd_valid = 1'b1;
        cmd_addr  = cur_q;
        cmd_size  = ring_ph ? HSIZE_HALF : HSIZE_WORD;
        cmd_wdata = ring_ph ? {prep_q, prep_q} : ph_q.ph;
      end
      P_SH_RD:   begin rp_re = 1'b1; rp_addr = RP_SHADOW + {3'd0, layer_q, s_cur}; end
      P_SH_ADDR: begin
        cmd_valid = 1'b1;
        cmd_write = 1'b0;
        cmd_addr  = rp_rdata + {17'd0, cls_q.pixel, 2'b00};
      end
      P_SH_WRITE: begin
        cmd_valid = 1'b1;
        cmd_addr  = sh_addr_q;
        cmd_wdata = sh_data_q;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= P_IDLE; ph_q <= '0; cls_q <= '0; prep_q <= '0; layer_q <= 1'b0; ring_ph <= 1'b0;
      cur_q <= '0; end_q <= '0; left <= '0; sh_addr_q <= '0; sh_data_q <= '0;
      cnt_inc <= 1'b0; raw_valid <= 1'b0; bus_error <= 1'b0;
      for (int i = 0; i < N_WC; i++) wc[i] <= '0;
    end else begin
      cnt_inc   <= 1'b0;
      raw_valid <= 1'b0;
      if (m_err) bus_error <= 1'b1;
      if (clear) for (int i = 0; i < N_WC; i++) wc[i] <= '0;
      unique case (st)
        P_IDLE: if (buf_rd) begin
          ph_q      <= buf_data;
          cls_q     <= cls;
          prep_q    <= prep;
          layer_q   <= layer;
          ring_ph   <= 1'b0;
          left      <= cls.strips;
          cnt_inc   <= 1'b1;
          raw_valid <= 1'b1;
          st        <= P_RD_CUR;
        end
        P_RD_CUR:  st <= P_RD_END;
        P_RD_END:  begin cur_q <= rp_rdata; st <= P_RD_BASE; end
        P_RD_BASE: begin end_q <= rp_rdata; st <= P_RING_WR; end
        P_RING_WR: st <= P_RING_WAIT;
        P_RING_WAIT: if (m_done) begin
          if (!clear) begin
            if (ring_ph) wc[N_LINKS] <= wc[N_LINKS] + 1'b1;
            else         wc[{1'b0, ph_q.link}] <= wc[{1'b0, ph_q.link}] + 1'b1;
          end
          if (!ring_ph) begin
            ring_ph <= 1'b1;
            st      <= P_RD_CUR;
          end else begin
            st <= (left != 0) ? P_SH_RD : P_IDLE;
          end
        end
        P_SH_RD:   st <= P_SH_ADDR;
        P_SH_ADDR: begin sh_addr_q <= cmd_addr; st <= P_SH_RWAIT; end
        P_SH_RWAIT: if (m_done) begin
          sh_data_q <= m_rdata + 1'b1;
          st        <= P_SH_WRITE;
        end
        P_SH_WRITE: st <= P_SH_WWAIT;
        P_SH_WWAIT: if (m_done) begin
          left[s_cur] <= 1'b0;
          st <= ((left & ~(4'b1 << s_cur)) != 0) ? P_SH_RD : P_IDLE;
        end
        default: st <= P_IDLE;
      endcase
    end
  end

  assign cnt_strips = cls_q.strips;
  assign cnt_zone   = cls_q.zone;
  assign raw_link   = ph_q.link;
  assign raw_data   = ph_q.ph;
  assign wc_data    = (wc_idx < 6'(N_WC)) ? wc[wc_idx[3:0]] : '0;
  assign idle       = (st == P_IDLE);

  // A command is only issued when the master port is free.
  a_cmd_ready: assert property (@(posedge clk) disable iff (!rst_n) cmd_valid |-> cmd_ready);
endmodule
