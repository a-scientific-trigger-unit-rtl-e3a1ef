// tb_els_rate: the ELS FPGA at the two photon rates quoted for the trigger
// unit, over full-length 10 ms time frames (200000 cycles at 20 MHz):
//   phase 1: the nominal camera rate of about 4000 photons/s;
//   phase 2: 214000 photons/s, the rate the complete unit sustained.
// Photons arrive on all 8 links with random spacing around the target
// rate. The device is reached through its PCI pins: the CPU's register
// accesses are PCI memory cycles, and the SDRAM is a PCI memory target
// that answers each FPGA cycle after 0-2 clocks of DEVSEL# delay and 0-3 of
// TRDY# delay and retries 5% of them. Each frame the interrupt routine sums the word
// counts and counters. The test checks that every photon is written once
// to its raw ring and once to the photon ring, and that the shadowgram
// increments match the counters. It also checks that nothing overflows and
// that the rate achieved matches the rate offered. The peak fill of the
// raw photons buffer and the busy fraction of data processing are printed.
module tb_els_rate;
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
  localparam logic [31:0] BAR = 32'hE000_0000;
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
  pci_sys_model #(.MAX_LAT(3), .RETRY_PCT(5)) u_pci (
    .clk, .rst_n, .d_ad_o(ad_o), .d_ad_oe(ad_oe), .d_cbe_o(cbe_o), .d_cbe_oe(cbe_oe),
    .d_par_o(par_o), .d_par_oe(par_oe), .d_frame_n_o(frame_n_o), .d_frame_oe(frame_oe),
    .d_irdy_n_o(irdy_n_o), .d_irdy_oe(irdy_oe), .d_trdy_n_o(trdy_n_o), .d_devsel_n_o(devsel_n_o),
    .d_stop_n_o(stop_n_o), .d_trgt_oe(trgt_oe), .d_req_n(req_n), .d_gnt_n(gnt_n), .d_idsel(idsel),
    .ad, .cbe, .frame_n, .irdy_n, .trdy_n, .devsel_n, .stop_n
  );

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

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

  localparam logic [31:0] RAW_B = 32'h0100_0000, RAW_STRIDE = 32'h0010_0000;
  localparam logic [31:0] PH_B = 32'h0200_0000, SH_B = 32'h0300_0000;

  // links: each sends a photon, then waits a random number of bit slots
  // with mean `mean_gap`
  int  mean_gap = 20000;
  bit  inject_on = 0;
  int  n_sent = 0;
  for (genvar l = 0; l < 8; l++) begin : g_drv
    initial begin
      forever begin
        @(negedge cxg_clk);
        if (inject_on) begin
          raw_photon_t p;
          repeat ($urandom_range(2 * mean_gap, 0)) @(negedge cxg_clk);
          if (inject_on) begin
            p.pixel  = 13'($urandom_range(6399, 0));
            p.energy = 12'($urandom());
            p.tstamp = 7'($urandom());
            n_sent++;
            cxg_link[l] = 1'b1;
            for (int b = 31; b >= 0; b--) begin @(negedge cxg_clk); cxg_link[l] = p[b]; end
            @(negedge cxg_clk); cxg_link[l] = 1'b0;
          end
        end
      end
    end
  end

  // observation
  int unsigned max_level = 0;
  longint busy = 0, cyc_total = 0;
  always @(posedge clk) if (rst_n && dut.u_core.cfg.acq) begin
    cyc_total++;
    if (!dut.u_core.proc_idle) busy++;
    if (dut.u_core.raw_level > max_level) max_level = dut.u_core.raw_level;
  end

  longint wc_raw_sum = 0, wc_ph_sum = 0, cnt_sum = 0;
  int frames = 0;
  task automatic isr();
    logic [31:0] v;
    wait (cpu_irq[0]);
    @(negedge clk);
    frames++;
    for (int i = 0; i < 36; i++) begin
      cpu_rd({22'd0, REGION_CNT, 6'(i), 2'b00}, v);
      cnt_sum += v;
    end
    for (int i = 0; i < 9; i++) begin
      cpu_rd({22'd0, REGION_WC, 6'(i), 2'b00}, v);
      if (i < 8) wc_raw_sum += v; else wc_ph_sum += v;
    end
    cpu_wr(reg_a(R_IRQ_ACK), 32'h1);
    repeat (2) @(negedge clk);
  endtask

  // count shadowgram increments in both layers of the 4 strips
  function automatic longint shadow_total();
    longint t = 0;
    for (int ly = 0; ly < 2; ly++)
      for (int s = 0; s < 4; s++)
        for (int p = 0; p < 6400; p++)
          t += u_pci.peek(SH_B + 32'(ly) * 32'h10_0000 + 32'(s) * 32'h8000 + 32'(4 * p));
    return t;
  endfunction

  task automatic run_phase(input string name, input int gap, input int nframes, input real rate);
    int sent0, frames0;
    longint raw0, ph0, cnt0, sh0, busy0, cyc0;
    logic [31:0] v;
    sent0 = n_sent; raw0 = wc_raw_sum; ph0 = wc_ph_sum; cnt0 = cnt_sum; frames0 = frames;
    sh0 = shadow_total(); busy0 = busy; cyc0 = cyc_total; max_level = 0;
    mean_gap = gap;
    inject_on = 1;
    repeat (nframes) isr();
    inject_on = 0;
    // let the links and the buffer empty, then one more frame
    repeat (2000) @(negedge clk);
    isr();
    begin
      int sent;
      real achieved;
      sent = n_sent - sent0;
      achieved = real'(sent) / (real'(nframes) * 0.01);
      $display("%s: %0d photons in %0d frames (%0.0f photons/s offered, %0.0f target), peak buffer %0d, processing busy %0.1f%%",
               name, sent, nframes, achieved, rate, max_level, 100.0 * real'(busy - busy0) / real'(cyc_total - cyc0));
      check(achieved > 0.8 * rate && achieved < 1.2 * rate, $sformatf("%s: offered rate %0.0f", name, achieved));
      check(wc_raw_sum - raw0 == longint'(sent), $sformatf("%s: raw words %0d, photons %0d", name, wc_raw_sum - raw0, sent));
      check(wc_ph_sum - ph0 == longint'(sent), $sformatf("%s: photon-ring words %0d", name, wc_ph_sum - ph0));
      check(shadow_total() - sh0 == cnt_sum - cnt0, $sformatf("%s: shadowgram increments %0d, counter total %0d", name, shadow_total() - sh0, cnt_sum - cnt0));
      check(cnt_sum - cnt0 >= longint'(sent), $sformatf("%s: every photon counted in at least one strip", name));
    end
    cpu_rd(reg_a(R_STATUS), v);
    check(v[15:3] == 0, $sformatf("%s: no overrun, overflow or bus error (status %h)", name, v));
  endtask

  initial begin
    repeat (4_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    u_pci.cfg_wr(6'd4, BAR);          // PCI header: BAR0, memory space, bus master
    u_pci.cfg_wr(6'd1, 32'h6);
    // every band in strip 0 so that every photon is counted
    cpu_wr(reg_a(R_STRIP_MAP), 32'h9DDD_7731);
    for (int l = 0; l < 8; l++) begin
      cpu_wr(rp_a(RP_RAW_BASE + 6'(l)), RAW_B + 32'(l) * RAW_STRIDE);
      cpu_wr(rp_a(RP_RAW_END + 6'(l)), RAW_B + 32'(l + 1) * RAW_STRIDE);
      cpu_wr(rp_a(RP_RAW_CUR + 6'(l)), RAW_B + 32'(l) * RAW_STRIDE);
    end
    cpu_wr(rp_a(RP_PH_BASE), PH_B);
    cpu_wr(rp_a(RP_PH_END), PH_B + 32'h0010_0000);
    cpu_wr(rp_a(RP_PH_CUR), PH_B);
    for (int ly = 0; ly < 2; ly++)
      for (int s = 0; s < 4; s++)
        cpu_wr(rp_a(RP_SHADOW + 6'(4 * ly + s)), SH_B + 32'(ly) * 32'h10_0000 + 32'(s) * 32'h8000);
    cpu_wr(reg_a(R_CTRL), 32'h0000_FF01);
    // link slot = 100 ns; per-link mean spacing = 8 / rate; a photon takes 33 slots
    run_phase("nominal 4000 photons/s", 20000 - 33, 3, 4000.0);
    run_phase("measured 214000 photons/s", 374 - 33, 2, 214000.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
