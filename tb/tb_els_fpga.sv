// tb_els_fpga: end-to-end test of the ELS FPGA device (PCI level) at its
// default parameters.
//
// The testbench plays the CPU (PCI configuration of the bridge, PCI memory
// cycles to the registers, interrupt routine), the SDRAM (PCI memory
// target with random latency and retries, through a PCI bus model with
// arbiter) and the camera (8 serial links driven on the falling
// edge of the CXG clock). It loads the pointer RAM, starts acquisition and
// injects random photons on all links. The first time frame runs at the
// reset length of 200000 cycles (10 ms at 20 MHz) and its timing is
// checked; later frames are shortened through the frame-length register so
// that shadowgram swap periods come around. The interrupt routine checks
// the 36 counters and the 9 word counts of every frame, swaps the
// shadowgram layer at each swap interrupt and acknowledges. One link is
// switched to its emulator for a while, and one acknowledge is held back
// to provoke a frame overrun. At the end the raw rings (one of which
// wraps), the photon ring, the ring pointers and both shadowgram layers are
// compared with a reference built from the photons injected.
module tb_els_fpga;
  import els_pkg::*;
  logic clk = 0, rst_n = 0;
  always #25 clk = ~clk;   // 20 MHz
  int checks = 0, failures = 0;

  logic [7:0]  cxg_link = '0;
  logic        cxg_clk, cxg_top_frame;
  logic [1:0]  cpu_irq;
  logic        raw_valid;
  logic [2:0]  raw_link;
  logic [31:0] raw_data;
  localparam logic [31:0] BAR = 32'hE000_0000;   // where the CPU maps the FPGA
  logic [31:0] ad_o;  logic ad_oe;  logic [3:0] cbe_o; logic cbe_oe; logic par_o, par_oe;
  logic frame_n_o, frame_oe, irdy_n_o, irdy_oe, trdy_n_o, devsel_n_o, stop_n_o, trgt_oe;
  logic req_n, gnt_n, idsel;
  logic [31:0] ad; logic [3:0] cbe; logic frame_n, irdy_n, trdy_n, devsel_n, stop_n;

  els_fpga dut (
    .clk, .rst_n, .cxg_link, .cxg_clk, .cxg_top_frame, .cpu_irq, .raw_valid, .raw_link, .raw_data,
    .pci_ad_i(ad), .pci_ad_o(ad_o), .pci_ad_oe(ad_oe), .pci_cbe_i(cbe), .pci_cbe_o(cbe_o),
    .pci_cbe_oe(cbe_oe), .pci_par_o(par_o), .pci_par_oe(par_oe), .pci_frame_n_i(frame_n),
    .pci_frame_n_o(frame_n_o), .pci_frame_oe(frame_oe), .pci_irdy_n_i(irdy_n), .pci_irdy_n_o(irdy_n_o),
    .pci_irdy_oe(irdy_oe), .pci_trdy_n_i(trdy_n), .pci_devsel_n_i(devsel_n), .pci_stop_n_i(stop_n),
    .pci_trdy_n_o(trdy_n_o), .pci_devsel_n_o(devsel_n_o), .pci_stop_n_o(stop_n_o),
    .pci_trgt_oe(trgt_oe), .pci_idsel(idsel), .pci_req_n(req_n), .pci_gnt_n(gnt_n)
  );
  pci_sys_model #(.MAX_LAT(2), .RETRY_PCT(5)) u_pci (
    .clk, .rst_n, .d_ad_o(ad_o), .d_ad_oe(ad_oe), .d_cbe_o(cbe_o), .d_cbe_oe(cbe_oe),
    .d_par_o(par_o), .d_par_oe(par_oe), .d_frame_n_o(frame_n_o), .d_frame_oe(frame_oe),
    .d_irdy_n_o(irdy_n_o), .d_irdy_oe(irdy_oe), .d_trdy_n_o(trdy_n_o), .d_devsel_n_o(devsel_n_o),
    .d_stop_n_o(stop_n_o), .d_trgt_oe(trgt_oe), .d_req_n(req_n), .d_gnt_n(gnt_n), .d_idsel(idsel),
    .ad, .cbe, .frame_n, .irdy_n, .trdy_n, .devsel_n, .stop_n
  );

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 5) $display("FAIL %0t: %s lvl %0d ovf %b st %0d", $time, msg, dut.u_core.u_rawbuf.level, dut.u_core.link_ovf, dut.u_core.u_proc.st); end
  endtask

  // ---------------------------------------------------------------- CPU bus
  task automatic cpu_wr(input logic [31:0] a, input logic [31:0] d);
    int s;
    u_pci.mem_wr(BAR + a, d, s);
    check(s == 0, "register write claimed");
  endtask
  task automatic cpu_rd(input logic [31:0] a, output logic [31:0] r);
    int s;
    u_pci.mem_rd(BAR + a, r, s);
    check(s == 0, "register read claimed");
  endtask
  function automatic logic [31:0] reg_a(input logic [5:0] i); return {22'd0, REGION_REGS, i, 2'b00}; endfunction
  function automatic logic [31:0] rp_a(input logic [5:0] i);  return {22'd0, REGION_RPTR, i, 2'b00}; endfunction

  // ------------------------------------------------------------ SDRAM map
  localparam logic [31:0] RAW_B = 32'h0100_0000, RAW_STRIDE = 32'h0001_0000;
  localparam int RAW0_WORDS = 8, RAW_WORDS = 16384;
  localparam logic [31:0] PH_B = 32'h0200_0000, SH_B = 32'h0300_0000;
  localparam int PH_HALVES = 65536;

  // ------------------------------------------------------------ camera links
  logic [31:0] inj [8][$];     // photons still to send, per link
  logic [31:0] sent [8][$];    // photons sent, not yet seen on the raw stream
  bit inject_on = 0;
  int gap_max = 1600;   // slower than the AHB-level test: every SDRAM access is a PCI cycle
  for (genvar l = 0; l < 8; l++) begin : g_drv
    initial begin
      forever begin
        @(negedge cxg_clk);
        if (inject_on && inj[l].size() > 0) begin
          logic [31:0] w;
          w = inj[l].pop_front();
          sent[l].push_back(w);
          cxg_link[l] = 1'b1;                       // start bit
          for (int b = 31; b >= 0; b--) begin @(negedge cxg_clk); cxg_link[l] = w[b]; end
          @(negedge cxg_clk); cxg_link[l] = 1'b0;
          repeat ($urandom_range(gap_max, 0)) @(negedge cxg_clk);
        end
      end
    end
  end

  // ------------------------------------------------------------ reference
  logic [6:0][11:0] thr;
  logic [7:0][3:0]  smap;
  logic             layer = 0;
  logic [31:0]      emu_word = 32'h0C80_7FFF;   // pixel 100, energy 0xFFF
  bit               emu_expected = 0;
  int unsigned ref_cnt [36];
  int unsigned ref_wc [9];
  logic [31:0] raw_hist [8][$];
  logic [15:0] ph_hist [$];
  int unsigned ref_sh [int unsigned];
  int n_photons = 0, n_emulated = 0;

  function automatic int band_of(input logic [11:0] e);
    int b = 0;
    for (int i = 0; i < 7; i++) if (e >= thr[i]) b = i + 1;
    return b;
  endfunction

  always @(posedge clk) if (rst_n && raw_valid) begin
    raw_photon_t p;
    int l, b, x, y, z;
    p = raw_data;
    l = int'(raw_link);
    if (l == 7 && emu_expected && sent[7].size() == 0) begin
      check(raw_data == emu_word, "emulated photon");
      n_emulated++;
    end else begin
      check(sent[l].size() > 0 && raw_data == sent[l][0], $sformatf("raw stream link %0d in injection order", l));
      if (sent[l].size() > 0) void'(sent[l].pop_front());
    end
    b = band_of(p.energy);
    x = int'(p.pixel) % 80; y = int'(p.pixel) / 80;
    z = 3 * ((y < 27) ? 0 : (y < 54) ? 1 : 2) + ((x < 27) ? 0 : (x < 54) ? 1 : 2);
    for (int s = 0; s < 4; s++) if (smap[b][s]) begin
      ref_cnt[s * 9 + z]++;
      ref_sh[int'(SH_B + 32'(layer) * 32'h10_0000 + 32'(s) * 32'h8000 + 32'(p.pixel) * 4)]++;
    end
    ref_wc[l]++; ref_wc[8]++;
    raw_hist[l].push_back(raw_data);
    ph_hist.push_back({p.pixel, 3'(b)});
    n_photons++;
  end

  // ------------------------------------------------------------ mechanisms
  int m_frame_irq = 0, m_swap_irq = 0, m_freeze_backlog = 0, m_contention = 0;
  longint m_busy = 0;
  int m_raw_wrap = 0, m_emulated = 0, m_overrun = 0, m_wait_states = 0, m_top_frame = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_core.freeze && !dut.u_core.raw_empty) m_freeze_backlog++;
    if ($countones(dut.u_core.link_valid) > 1) m_contention++;
    if (cxg_top_frame && !$past(cxg_top_frame)) m_top_frame++;
    if (!dut.u_core.proc_idle) m_busy++;
  end

  // ------------------------------------------------------------ timing
  longint cyc = 0, t_acq = -1, t_tick = -1, t_irq = -1;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && dut.u_core.cfg.acq && t_acq < 0) t_acq = cyc;
    if (rst_n && dut.u_core.frame_tick && t_tick < 0) t_tick = cyc;
    if (rst_n && cpu_irq[0] && t_irq < 0) t_irq = cyc;
  end

  // ------------------------------------------------------------ interrupt routine
  task automatic isr(input bit late_ack);
    logic [31:0] st, v;
    wait (cpu_irq[0]);
    @(negedge clk);
    m_frame_irq++;
    cpu_rd(reg_a(R_STATUS), st);
    check(st[0], "status shows frozen");
    check(dut.u_core.proc_idle, "no photon in flight during the interrupt");
    for (int i = 0; i < 36; i++) begin
      cpu_rd({22'd0, REGION_CNT, 6'(i), 2'b00}, v);
      check(v == ref_cnt[i], $sformatf("frame %0d counter %0d = %0d exp %0d", m_frame_irq, i, v, ref_cnt[i]));
    end
    for (int i = 0; i < 9; i++) begin
      cpu_rd({22'd0, REGION_WC, 6'(i), 2'b00}, v);
      check(v == ref_wc[i], $sformatf("frame %0d word count %0d = %0d exp %0d", m_frame_irq, i, v, ref_wc[i]));
    end
    if (late_ack) begin
      wait (dut.u_core.frame_tick); @(negedge clk);
      cpu_rd(reg_a(R_STATUS), st);
      check(st[3], "overrun flagged");
      if (st[3]) m_overrun++;
      cpu_wr(reg_a(R_IRQ_ACK), 32'h4);
      cpu_rd(reg_a(R_STATUS), st);
      check(!st[3], "overrun cleared");
    end
    if (cpu_irq[1]) begin
      m_swap_irq++;
      layer = !layer;
      cpu_rd(reg_a(R_CTRL), v);
      cpu_wr(reg_a(R_CTRL), {v[31:2], layer, v[0]});
      cpu_wr(reg_a(R_IRQ_ACK), 32'h2);
    end
    foreach (ref_cnt[i]) ref_cnt[i] = 0;
    foreach (ref_wc[i]) ref_wc[i] = 0;
    cpu_wr(reg_a(R_IRQ_ACK), 32'h1);
    repeat (2) @(negedge clk);
    check(!cpu_irq[0], "interrupt cleared by the acknowledge");
  endtask

  function automatic logic [31:0] rand_photon();
    raw_photon_t p;
    p.pixel  = 13'($urandom_range(6399, 0));
    if ($urandom_range(7, 0) == 0) p.pixel = 13'($urandom_range(5, 0) * 81);
    p.energy = 12'($urandom());
    p.tstamp = 7'($urandom());
    return p;
  endfunction

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] v;
    foreach (ref_cnt[i]) ref_cnt[i] = 0;
    foreach (ref_wc[i]) ref_wc[i] = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    // PCI header: BAR0, memory space and bus mastering on
    u_pci.cfg_wr(6'd4, BAR);
    u_pci.cfg_wr(6'd1, 32'h6);
    u_pci.cfg_rd(6'd4, v);
    check(v == BAR, "BAR0 set");
    // settings as reset (thresholds) and a custom strip map
    for (int i = 0; i < 7; i++) thr[i] = 12'((i + 1) * 512);
    smap = 32'h8C6E_1F3B;
    cpu_wr(reg_a(R_STRIP_MAP), smap);
    cpu_rd(reg_a(R_FRAME_CYC), v);
    check(v == 200000, "frame length defaults to 10 ms at 20 MHz");
    // pointer RAM
    for (int l = 0; l < 8; l++) begin
      cpu_wr(rp_a(RP_RAW_BASE + 6'(l)), RAW_B + 32'(l) * RAW_STRIDE);
      cpu_wr(rp_a(RP_RAW_END + 6'(l)), RAW_B + 32'(l) * RAW_STRIDE + 4 * ((l == 0) ? RAW0_WORDS : RAW_WORDS));
      cpu_wr(rp_a(RP_RAW_CUR + 6'(l)), RAW_B + 32'(l) * RAW_STRIDE);
    end
    cpu_wr(rp_a(RP_PH_BASE), PH_B);
    cpu_wr(rp_a(RP_PH_END), PH_B + 2 * PH_HALVES);
    cpu_wr(rp_a(RP_PH_CUR), PH_B);
    for (int ly = 0; ly < 2; ly++)
      for (int s = 0; s < 4; s++)
        cpu_wr(rp_a(RP_SHADOW + 6'(4 * ly + s)), SH_B + 32'(ly) * 32'h10_0000 + 32'(s) * 32'h8000);
    cpu_rd(rp_a(RP_RAW_END + 6'd3), v);
    check(v == RAW_B + 3 * RAW_STRIDE + 4 * RAW_WORDS, "pointer RAM read back");
    // photons to inject
    for (int l = 0; l < 8; l++) repeat (700) inj[l].push_back(rand_photon());
    // acquisition on: all links, layer 0
    cpu_wr(reg_a(R_CTRL), 32'h0000_FF01);
    inject_on = 1;
    // frame 1 at the full 10 ms length
    isr(0);
    check(t_tick - t_acq == 200000 - 1 || t_tick - t_acq == 200000, $sformatf("first frame after %0d cycles", t_tick - t_acq));
    check(t_irq - t_tick < 200, $sformatf("interrupt %0d cycles after the frame tick", t_irq - t_tick));
    // shorter frames, a swap every 3 frames
    cpu_wr(reg_a(R_FRAME_CYC), 32'd12000);
    cpu_wr(reg_a(R_SWAP_FRAMES), 32'd3);
    for (int f = 0; f < 8; f++) begin
      if (f == 2) begin
        // link 7 to its emulator
        cpu_wr(reg_a(R_EMU_WORD), emu_word);
        cpu_wr(reg_a(R_EMU_PERIOD), 32'd200);
        inj[7].delete();
        while (sent[7].size() != 0) begin
          if (cpu_irq[0]) isr(0);
          else @(negedge clk);
        end
        emu_expected = 1;
        cpu_rd(reg_a(R_CTRL), v);
        cpu_wr(reg_a(R_CTRL), v | 32'h0080_0000);
      end
      if (f == 4) begin
        cpu_rd(reg_a(R_CTRL), v);
        cpu_wr(reg_a(R_CTRL), v & ~32'h0080_8000);   // emulator and link 7 off
      end
      isr(f == 5);
    end
    m_emulated = n_emulated;
    // keep serving frames until every photon has been sent
    for (int l = 0; l < 7; l++)
      while (inj[l].size() != 0 || sent[l].size() != 0) begin
        if (cpu_irq[0]) isr(0);
        else @(negedge clk);
      end
    // drain: stop links, let the last photons through
    cpu_rd(reg_a(R_CTRL), v);
    cpu_wr(reg_a(R_CTRL), v & ~32'h0000_FF00);
    repeat (3000) @(negedge clk);
    if (cpu_irq[0]) isr(0);
    repeat (500) @(negedge clk);
    check(dut.u_core.proc_idle && dut.u_core.raw_empty, "all photons processed");
    // ring pointers and contents
    for (int l = 0; l < 8; l++) begin
      int n, words;
      words = (l == 0) ? RAW0_WORDS : RAW_WORDS;
      n = raw_hist[l].size();
      if (l == 0 && n > RAW0_WORDS) m_raw_wrap++;
      cpu_rd(rp_a(RP_RAW_CUR + 6'(l)), v);
      check(v == RAW_B + 32'(l) * RAW_STRIDE + 32'(4 * (n % words)), $sformatf("raw pointer link %0d", l));
      for (int k = (n > words) ? n - words : 0; k < n; k++)
        check(u_pci.peek(RAW_B + 32'(l) * RAW_STRIDE + 32'(4 * (k % words))) == raw_hist[l][k],
              $sformatf("raw ring %0d entry %0d", l, k));
    end
    cpu_rd(rp_a(RP_PH_CUR), v);
    check(v == PH_B + 32'(2 * ph_hist.size()), "photon ring pointer");
    for (int k = 0; k < ph_hist.size(); k++) begin
      logic [31:0] a, w;
      a = PH_B + 32'(2 * k);
      w = u_pci.peek(a);
      check((a[1] ? w[31:16] : w[15:0]) == ph_hist[k], $sformatf("photon ring entry %0d", k));
    end
    foreach (ref_sh[a])
      check(u_pci.peek(a) == ref_sh[a], $sformatf("shadowgram word %h = %0d exp %0d", a, u_pci.peek(a), ref_sh[a]));
    m_wait_states = u_pci.n_retry;
    for (int l = 0; l < 7; l++) check(sent[l].size() == 0 && inj[l].size() == 0, "every injected photon came out");
    cpu_rd(reg_a(R_STATUS), v);
    check(v[15:4] == 0, "no overflow and no bus error");
    // every mechanism happened
    check(m_frame_irq >= 9,      $sformatf("frame interrupts: %0d", m_frame_irq));
    check(m_swap_irq >= 2,       $sformatf("shadowgram swaps: %0d", m_swap_irq));
    check(m_freeze_backlog > 0,  $sformatf("photons held during freeze: %0d cycles", m_freeze_backlog));
    check(m_contention > 0,      $sformatf("link contention: %0d cycles", m_contention));
    check(m_raw_wrap > 0,        "raw ring wrap");
    check(m_emulated > 0,        $sformatf("emulated photons: %0d", m_emulated));
    check(m_overrun > 0,         "frame overrun");
    check(m_wait_states > 0,     "PCI target retries");
    check(u_pci.n_conflict == 0, "no PCI bus conflict");
    check(u_pci.n_par_chk > 1000 && u_pci.n_par_err == 0, "PCI parity");
    check(m_top_frame >= 9,      $sformatf("top-frame pulses: %0d", m_top_frame));
    $display("photons %0d, frames %0d, swaps %0d, emulated %0d, freeze-backlog cycles %0d, contention cycles %0d, PCI retries %0d",
             n_photons, m_frame_irq, m_swap_irq, m_emulated, m_freeze_backlog, m_contention, m_wait_states);
    $display("data processing busy %0d cycles, %0d cycles per photon", m_busy, m_busy / n_photons);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
