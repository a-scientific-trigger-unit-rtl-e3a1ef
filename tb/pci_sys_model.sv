// pci_sys_model: behavioural model of the PCI bus around the FPGA's
// PCI/AHB bridge. Not synthesizable.
//
// It holds three things:
//  - the host: a PCI master (the processor side) with tasks for single
//    configuration and memory cycles, a random IRDY# delay, retry on STOP#
//    and master-abort detection;
//  - a memory target (the board SDRAM behind the host bridge) that claims
//    every memory cycle the FPGA masters, with random DEVSEL#/TRDY#
//    latency and an occasional retry; addresses 0xF000_0000 and up are
//    left unclaimed, so that a master abort can be provoked;
//  - the central arbiter (host first, grant changed only on an idle bus)
//    and the wired bus itself: every shared signal is resolved from the
//    output enables, released signals float high (pull-ups), and two
//    drivers on one signal are counted in `n_conflict`.
// Parity driven by the FPGA is checked against the previous clock's AD and
// C/BE# (`n_par_err`).
module pci_sys_model #(
  parameter int unsigned MAX_LAT = 3,       // target TRDY# latency 0..MAX_LAT
  parameter int unsigned RETRY_PCT = 10     // share of FPGA cycles retried first
) (
  input  logic        clk,
  input  logic        rst_n,
  // FPGA pins
  input  logic [31:0] d_ad_o,
  input  logic        d_ad_oe,
  input  logic [3:0]  d_cbe_o,
  input  logic        d_cbe_oe,
  input  logic        d_par_o,
  input  logic        d_par_oe,
  input  logic        d_frame_n_o,
  input  logic        d_frame_oe,
  input  logic        d_irdy_n_o,
  input  logic        d_irdy_oe,
  input  logic        d_trdy_n_o,
  input  logic        d_devsel_n_o,
  input  logic        d_stop_n_o,
  input  logic        d_trgt_oe,
  input  logic        d_req_n,
  output logic        d_gnt_n,
  output logic        d_idsel,
  // resolved bus
  output logic [31:0] ad,
  output logic [3:0]  cbe,
  output logic        frame_n,
  output logic        irdy_n,
  output logic        trdy_n,
  output logic        devsel_n,
  output logic        stop_n
);
  localparam logic [3:0] CMD_MEM_RD = 4'b0110, CMD_MEM_WR = 4'b0111;
  localparam logic [3:0] CMD_CFG_RD = 4'b1010, CMD_CFG_WR = 4'b1011;

  // host drivers
  logic        h_frame_oe = 0, h_frame_n = 1, h_irdy_oe = 0, h_irdy_n = 1;
  logic        h_ad_oe = 0, h_cbe_oe = 0, h_idsel = 0, host_want = 0;
  logic [31:0] h_ad = '0;
  logic [3:0]  h_cbe = '0;
  // memory target drivers
  logic        g_oe = 0, g_trdy_n = 1, g_devsel_n = 1, g_stop_n = 1, g_ad_oe = 0;
  logic [31:0] g_ad = '0;

  int unsigned n_conflict = 0, n_par_err = 0, n_par_chk = 0;
  int unsigned n_tgt_wr = 0, n_tgt_rd = 0, n_retry = 0, n_grant_fpga = 0, n_host_retry = 0;
  logic [31:0] mem [int unsigned];

  function automatic logic [31:0] peek(input logic [31:0] a);
    return mem.exists(int'(a >> 2)) ? mem[int'(a >> 2)] : 32'd0;
  endfunction
  function automatic void poke(input logic [31:0] a, input logic [31:0] v);
    mem[int'(a >> 2)] = v;
  endfunction

  // ---------------------------------------------------------------- bus
  assign frame_n  = d_frame_oe ? d_frame_n_o : h_frame_oe ? h_frame_n : 1'b1;
  assign irdy_n   = d_irdy_oe ? d_irdy_n_o : h_irdy_oe ? h_irdy_n : 1'b1;
  assign ad       = d_ad_oe ? d_ad_o : h_ad_oe ? h_ad : g_ad_oe ? g_ad : 32'hFFFF_FFFF;
  assign cbe      = d_cbe_oe ? d_cbe_o : h_cbe_oe ? h_cbe : 4'hF;
  assign trdy_n   = d_trgt_oe ? d_trdy_n_o : g_oe ? g_trdy_n : 1'b1;
  assign devsel_n = d_trgt_oe ? d_devsel_n_o : g_oe ? g_devsel_n : 1'b1;
  assign stop_n   = d_trgt_oe ? d_stop_n_o : g_oe ? g_stop_n : 1'b1;
  assign d_idsel  = h_idsel;

  logic [31:0] ad_q;
  logic [3:0]  cbe_q;
  always @(posedge clk) begin
    if (int'(d_ad_oe) + int'(h_ad_oe) + int'(g_ad_oe) > 1) n_conflict++;
    if (d_frame_oe && h_frame_oe) n_conflict++;
    if (d_irdy_oe && h_irdy_oe) n_conflict++;
    if (d_cbe_oe && h_cbe_oe) n_conflict++;
    if (d_trgt_oe && g_oe) n_conflict++;
    if (rst_n && d_par_oe) begin
      n_par_chk++;
      if (d_par_o !== (^ad_q ^ ^cbe_q)) n_par_err++;
    end
    ad_q  <= ad;
    cbe_q <= cbe;
  end

  // ---------------------------------------------------------------- arbiter
  typedef enum logic [1:0] {OWN_NONE, OWN_HOST, OWN_FPGA} own_e;
  own_e owner = OWN_NONE;
  wire  bus_idle = frame_n && irdy_n;
  assign d_gnt_n = !(owner == OWN_FPGA);
  // idle as sampled on the last rising edge: a new master starts only
  // after the previous one has had its turnaround cycle
  logic idle_q = 1'b0;
  always @(posedge clk) idle_q <= bus_idle && devsel_n && trdy_n && stop_n;
  always @(posedge clk) begin
    if (bus_idle) begin
      if (host_want)     owner <= OWN_HOST;
      else if (!d_req_n) begin
        if (owner != OWN_FPGA) n_grant_fpga++;
        owner <= OWN_FPGA;
      end else           owner <= OWN_NONE;
    end
  end

  // ---------------------------------------------------------------- host
  // one cycle; status 0 = data transferred, 1 = master abort, 2 = retry
  task automatic host_cycle(input logic [3:0] cmd, input logic [31:0] addr, input logic [31:0] wdata,
                            input logic [3:0] be_n, input bit cfg, output logic [31:0] rdata,
                            output int status);
    int n;
    int unsigned dly;
    bit wr;
    wr = cmd[0];
    host_want = 1;
    do @(negedge clk); while (!(owner == OWN_HOST && idle_q && bus_idle));
    h_frame_oe = 1; h_frame_n = 0; h_irdy_oe = 1; h_irdy_n = 1;
    h_ad_oe = 1; h_ad = addr; h_cbe_oe = 1; h_cbe = cmd; h_idsel = cfg;
    @(negedge clk);
    h_idsel = 0; h_cbe = be_n;
    if (wr) h_ad = wdata; else h_ad_oe = 0;
    dly = $urandom_range(2, 0);
    repeat (dly) @(negedge clk);
    h_frame_n = 1; h_irdy_n = 0;
    status = 0; n = 0; rdata = '0;
    forever begin
      @(posedge clk);
      n++;
      if (!trdy_n && !devsel_n) begin rdata = ad; status = 0; break; end
      if (!stop_n && !devsel_n) begin status = 2; break; end
      if (devsel_n && n >= 6) begin status = 1; break; end
    end
    @(negedge clk);
    h_irdy_n = 1; h_ad_oe = 0; h_cbe_oe = 0;
    @(negedge clk);
    h_frame_oe = 0; h_irdy_oe = 0;
    host_want = 0;
  endtask

  task automatic host_access(input logic [3:0] cmd, input logic [31:0] addr, input logic [31:0] wdata,
                             input bit cfg, output logic [31:0] rdata, output int status);
    do begin
      host_cycle(cmd, addr, wdata, 4'b0000, cfg, rdata, status);
      if (status == 2) n_host_retry++;
    end while (status == 2);
  endtask

  task automatic cfg_wr(input logic [5:0] r, input logic [31:0] v);
    logic [31:0] d; int s;
    host_access(CMD_CFG_WR, {24'd0, r, 2'b00}, v, 1'b1, d, s);
  endtask
  task automatic cfg_rd(input logic [5:0] r, output logic [31:0] v);
    int s;
    host_access(CMD_CFG_RD, {24'd0, r, 2'b00}, '0, 1'b1, v, s);
  endtask
  task automatic mem_wr(input logic [31:0] a, input logic [31:0] v, output int s);
    logic [31:0] d;
    host_access(CMD_MEM_WR, a, v, 1'b0, d, s);
  endtask
  task automatic mem_rd(input logic [31:0] a, output logic [31:0] v, output int s);
    host_access(CMD_MEM_RD, a, '0, 1'b0, v, s);
  endtask

  // ---------------------------------------------------------------- memory target
  typedef enum logic [2:0] {G_IDLE, G_DEV, G_WAIT, G_XFER, G_STOP, G_TURN} gstate_e;
  gstate_e     gs = G_IDLE;
  logic        frame_q = 1;
  logic [31:0] g_addr;
  logic [3:0]  g_cmd;
  int unsigned g_dly;
  bit          g_retry;
  always @(posedge clk) begin
    frame_q <= frame_n;
    case (gs)
      G_IDLE: if (!frame_n && frame_q && d_frame_oe && (cbe == CMD_MEM_RD || cbe == CMD_MEM_WR) && ad[31:28] != 4'hF) begin
        g_addr  <= ad;
        g_cmd   <= cbe;
        g_dly   <= $urandom_range(2, 0);
        g_retry <= ($urandom_range(99, 0) < RETRY_PCT);
        gs      <= G_DEV;
      end
      G_DEV: if (g_dly == 0) begin
        g_oe <= 1; g_devsel_n <= 0;
        g_dly <= $urandom_range(MAX_LAT, 0);
        gs <= G_WAIT;
      end else g_dly <= g_dly - 1;
      G_WAIT: if (g_dly == 0) begin
        if (g_retry) begin
          g_stop_n <= 0; gs <= G_STOP;
        end else begin
          g_trdy_n <= 0;
          if (g_cmd == CMD_MEM_RD) begin g_ad_oe <= 1; g_ad <= peek(g_addr); end
          gs <= G_XFER;
        end
      end else g_dly <= g_dly - 1;
      G_XFER: if (!irdy_n) begin
        if (g_cmd == CMD_MEM_WR) begin
          logic [31:0] w;
          w = peek(g_addr);
          for (int b = 0; b < 4; b++) if (!cbe[b]) w[8*b +: 8] = ad[8*b +: 8];
          poke(g_addr, w);
          n_tgt_wr++;
        end else n_tgt_rd++;
        g_trdy_n <= 1; g_devsel_n <= 1; g_ad_oe <= 0;
        gs <= G_TURN;
      end
      G_STOP: if (!irdy_n) begin
        n_retry++;
        g_stop_n <= 1; g_devsel_n <= 1;
        gs <= G_TURN;
      end
      G_TURN: begin g_oe <= 0; gs <= G_IDLE; end
      default: gs <= G_IDLE;
    endcase
  end
endmodule
