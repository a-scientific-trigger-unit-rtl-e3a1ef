// tb_pci_ahb_bridge: self-checking testbench of the PCI/AHB bridge.
//
// The bridge sits between a PCI bus model (host master, memory target,
// arbiter) and two AHB models: an AHB memory standing for the FPGA
// registers behind the target side, and an AHB master (the port used by
// data processing) driving the master side. Checked:
//  - configuration header: ID, BAR0 size probe and base, command bits;
//  - FPGA master abort: AHB ERROR on a read, a posted write dropped;
//  - no response (master abort) to memory cycles while memory space is
//    disabled or outside BAR0, and an AHB ERROR while bus mastering is
//    disabled;
//  - random host word writes/reads through BAR0 against a reference copy
//    of the AHB memory;
//  - random FPGA word/halfword writes and word reads to PCI memory against
//    a reference, with target retries, random latencies and host traffic
//    running at the same time;
//  - FPGA writes are posted (AHB side released before the PCI cycle);
//  - no two drivers on a PCI signal, and correct PAR.
module tb_pci_ahb_bridge;
  import els_pkg::*;

  localparam logic [31:0] BASE = 32'hA000_0C00;

  logic clk = 0, rst_n = 0;
  always #15 clk = ~clk;

  int unsigned checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %0t: %s", $time, msg); end
  endtask

  // pins
  logic [31:0] ad_o;  logic ad_oe;  logic [3:0] cbe_o; logic cbe_oe; logic par_o, par_oe;
  logic frame_n_o, frame_oe, irdy_n_o, irdy_oe, trdy_n_o, devsel_n_o, stop_n_o, trgt_oe;
  logic req_n, gnt_n, idsel;
  logic [31:0] ad; logic [3:0] cbe; logic frame_n, irdy_n, trdy_n, devsel_n, stop_n;
  ahb_m2s_t m_o, s_i;
  ahb_s2m_t m_i, s_o;

  pci_ahb_bridge dut (
    .clk, .rst_n, .ad_i(ad), .ad_o, .ad_oe, .cbe_i(cbe), .cbe_o, .cbe_oe, .par_o, .par_oe,
    .frame_n_i(frame_n), .frame_n_o, .frame_oe, .irdy_n_i(irdy_n), .irdy_n_o, .irdy_oe,
    .trdy_n_i(trdy_n), .devsel_n_i(devsel_n), .stop_n_i(stop_n), .trdy_n_o, .devsel_n_o,
    .stop_n_o, .trgt_oe, .idsel, .req_n, .gnt_n, .m_o, .m_i, .s_i, .s_o
  );

  pci_sys_model #(.MAX_LAT(3), .RETRY_PCT(15)) pci (
    .clk, .rst_n, .d_ad_o(ad_o), .d_ad_oe(ad_oe), .d_cbe_o(cbe_o), .d_cbe_oe(cbe_oe),
    .d_par_o(par_o), .d_par_oe(par_oe), .d_frame_n_o(frame_n_o), .d_frame_oe(frame_oe),
    .d_irdy_n_o(irdy_n_o), .d_irdy_oe(irdy_oe), .d_trdy_n_o(trdy_n_o), .d_devsel_n_o(devsel_n_o),
    .d_stop_n_o(stop_n_o), .d_trgt_oe(trgt_oe), .d_req_n(req_n), .d_gnt_n(gnt_n), .d_idsel(idsel),
    .ad, .cbe, .frame_n, .irdy_n, .trdy_n, .devsel_n, .stop_n
  );

  ahb_mem_model #(.MAX_WAIT(3)) regs (.clk, .rst_n, .ahb_i(m_o), .ahb_o(m_i));

  // AHB master driving the bridge's slave side
  logic        c_valid, c_ready, c_write, c_done, c_err;
  logic [31:0] c_addr, c_wdata, c_rdata;
  logic [2:0]  c_size;
  ahb_master_port drv (
    .clk, .rst_n, .cmd_valid(c_valid), .cmd_ready(c_ready), .cmd_addr(c_addr), .cmd_write(c_write),
    .cmd_size(c_size), .cmd_wdata(c_wdata), .done(c_done), .err(c_err), .rdata(c_rdata),
    .ahb_o(s_i), .ahb_i(s_o)
  );
  initial begin c_valid = 0; c_addr = '0; c_write = 0; c_size = HSIZE_WORD; c_wdata = '0; end

  task automatic fpga_xfer(input logic [31:0] a, input bit w, input logic [2:0] sz, input logic [31:0] d,
                           output logic [31:0] r, output bit e);
    @(negedge clk);
    while (!c_ready) @(negedge clk);
    c_valid = 1; c_addr = a; c_write = w; c_size = sz; c_wdata = d;
    @(negedge clk);
    c_valid = 0;
    while (!c_done) @(negedge clk);
    r = c_rdata; e = c_err;
  endtask

  int unsigned n_posted = 0;
  always @(posedge clk) if (dut.post_now) n_posted++;

  // ---------------------------------------------------------------- host part
  logic [31:0] reg_ref [256];
  task automatic host_traffic(input int n);
    logic [31:0] a, v, r; int s;
    for (int i = 0; i < n; i++) begin
      a = BASE + 32'($urandom_range(255, 0) * 4);
      if ($urandom_range(1, 0) == 1) begin
        v = $urandom();
        pci.mem_wr(a, v, s);
        check(s == 0, "host write claimed");
        reg_ref[a[9:2]] = v;
      end else begin
        pci.mem_rd(a, r, s);
        check(s == 0 && r == reg_ref[a[9:2]], $sformatf("host read %h: %h exp %h", a, r, reg_ref[a[9:2]]));
      end
    end
  endtask

  // ---------------------------------------------------------------- FPGA part
  logic [31:0] mem_ref [int unsigned];
  task automatic fpga_traffic(input int n);
    logic [31:0] a, v, r, exp; bit e; int k;
    for (int i = 0; i < n; i++) begin
      a = 32'h4000_0000 + 32'($urandom_range(63, 0) * 4);
      k = $urandom_range(2, 0);
      exp = mem_ref.exists(int'(a >> 2)) ? mem_ref[int'(a >> 2)] : 32'd0;
      if (k == 0) begin
        v = $urandom();
        fpga_xfer(a, 1'b1, HSIZE_WORD, v, r, e);
        mem_ref[int'(a >> 2)] = v;
        check(!e, "fpga word write ok");
      end else if (k == 1) begin
        logic [15:0] h; bit hi;
        h = 16'($urandom()); hi = $urandom_range(1, 0) == 1;
        fpga_xfer(a | (hi ? 32'd2 : 32'd0), 1'b1, HSIZE_HALF, {h, h}, r, e);
        if (hi) exp[31:16] = h; else exp[15:0] = h;
        mem_ref[int'(a >> 2)] = exp;
        check(!e, "fpga half write ok");
      end else begin
        fpga_xfer(a, 1'b0, HSIZE_WORD, '0, r, e);
        check(!e && r == exp, $sformatf("fpga read %h: %h exp %h", a, r, exp));
      end
    end
  endtask

  initial begin : main
    logic [31:0] v, r; int s; bit e;
    for (int i = 0; i < 256; i++) begin reg_ref[i] = $urandom(); regs.poke(32'(i * 4), reg_ref[i]); end
    repeat (4) @(negedge clk);
    rst_n = 1;
    repeat (4) @(negedge clk);

    // header
    pci.cfg_rd(6'd0, v); check(v == 32'h0001_0001, "ID");
    pci.cfg_rd(6'd1, v); check(v == 32'h0, "command after reset");
    pci.cfg_rd(6'd2, v); check(v == 32'h0, "unimplemented header word");
    pci.mem_rd(BASE, r, s); check(s == 1, "no claim with memory space disabled");
    fpga_xfer(32'h4000_0000, 1'b1, HSIZE_WORD, 32'h1234_5678, r, e);
    check(e, "AHB error with bus mastering disabled");
    check(pci.n_grant_fpga == 0, "no request while bus mastering disabled");
    pci.cfg_wr(6'd4, 32'hFFFF_FFFF); pci.cfg_rd(6'd4, v); check(v == 32'hFFFF_FC00, "BAR0 size probe");
    pci.cfg_wr(6'd4, BASE); pci.cfg_rd(6'd4, v); check(v == BASE, "BAR0 base");
    pci.cfg_wr(6'd1, 32'h0000_0006); pci.cfg_rd(6'd1, v); check(v == 32'h0000_0006, "command bits");

    // master abort: unclaimed read ends in ERROR, unclaimed posted write is dropped
    fpga_xfer(32'hF000_0000, 1'b0, HSIZE_WORD, '0, r, e);
    check(e, "AHB error after a master abort on a read");
    fpga_xfer(32'hF000_0004, 1'b1, HSIZE_WORD, 32'hDEAD_BEEF, r, e);
    check(!e, "posted write reported done");
    fpga_xfer(32'h4000_0100, 1'b1, HSIZE_WORD, 32'h0BAD_F00D, r, e);
    fpga_xfer(32'h4000_0100, 1'b0, HSIZE_WORD, '0, r, e);
    check(!e && r == 32'h0BAD_F00D, "transfers after the master abort");
    check(!pci.mem.exists(32'hF000_0004 >> 2), "aborted write not stored");

    // window decode
    pci.mem_rd(BASE + 32'h400, r, s); check(s == 1, "no claim above BAR0");
    pci.mem_rd(BASE - 32'h4, r, s);   check(s == 1, "no claim below BAR0");
    pci.mem_rd(BASE + 32'h10, r, s);  check(s == 0 && r == reg_ref[4], "read through BAR0");

    // traffic, first separately then together
    host_traffic(150);
    check(regs.n_write > 0, "AHB writes seen");
    fpga_traffic(150);
    fork
      host_traffic(300);
      fpga_traffic(300);
    join
    repeat (40) @(negedge clk);      // last posted write reaches memory
    for (int i = 0; i < 256; i++) check(regs.peek(32'(i * 4)) == reg_ref[i], $sformatf("AHB word %0d", i));
    foreach (mem_ref[k]) check(pci.mem[k] == mem_ref[k], $sformatf("PCI word %h", k * 4));

    check(pci.n_conflict == 0, $sformatf("%0d bus conflicts", pci.n_conflict));
    check(pci.n_par_chk > 500 && pci.n_par_err == 0, $sformatf("parity %0d errors of %0d", pci.n_par_err, pci.n_par_chk));
    check(pci.n_retry > 10, "target retries exercised");
    check(n_posted > 50, "posted writes");
    check(pci.n_tgt_wr > 100 && pci.n_tgt_rd > 50, "FPGA master cycles");
    $display("retries %0d, fpga grants %0d, PCI writes %0d reads %0d, parity checks %0d",
             pci.n_retry, pci.n_grant_fpga, pci.n_tgt_wr, pci.n_tgt_rd, pci.n_par_chk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200_000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
