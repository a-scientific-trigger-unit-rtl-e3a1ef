// tb_ahb_slave_access: AHB-Lite writes and reads to each region, with a
// pointer RAM and modelled register/counter/word-count sources. Checks
// data, the region strobes, and the wait states (writes 0, reads 1).
module tb_ahb_slave_access;
  import els_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  ahb_m2s_t ahb_i;
  ahb_s2m_t ahb_o;
  logic reg_we, rp_we, rp_re;
  logic [5:0] widx;
  logic [31:0] wdata, reg_rdata, rp_rdata, cnt_rdata, wc_rdata;
  logic [31:0] regs [64];

  ahb_slave_access dut (.*);
  ram_pointers u_rp (.clk, .a_we(rp_we), .a_re(rp_re), .a_addr(widx), .a_wdata(wdata), .a_rdata(rp_rdata),
                     .b_we(1'b0), .b_re(1'b0), .b_addr(6'd0), .b_wdata(32'd0), .b_rdata());

  assign reg_rdata = regs[widx];
  assign cnt_rdata = 32'hC000_0000 | 32'(widx);
  assign wc_rdata  = 32'hD000_0000 | 32'(widx);
  always @(posedge clk) if (reg_we) regs[widx] <= wdata;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int waits;
  // single transfer; returns read data and counts data-phase wait states
  task automatic xfer(input logic [31:0] a, input bit w, input logic [31:0] d, output logic [31:0] r);
    @(negedge clk);
    ahb_i.htrans = HT_NONSEQ; ahb_i.haddr = a; ahb_i.hwrite = w; ahb_i.hsize = HSIZE_WORD;
    @(posedge clk); while (!ahb_o.hready) @(posedge clk);
    @(negedge clk);
    ahb_i.htrans = HT_IDLE; ahb_i.hwdata = d;
    waits = 0;
    #1;
    while (!ahb_o.hready) begin @(negedge clk); #1; waits++; end
    r = ahb_o.hrdata;
    @(posedge clk);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] r;
    logic [31:0] rp_ref [64];
    ahb_i = '0;
    foreach (regs[i]) regs[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 64; i++) begin
      rp_ref[i] = $urandom();
      xfer(32'h100 + 32'(4 * i), 1, rp_ref[i], r);
      check(waits == 0, "write with no wait state");
    end
    for (int n = 0; n < 200; n++) begin
      int i;
      i = $urandom_range(63, 0);
      case ($urandom_range(3, 0))
        0: begin
          logic [31:0] d;
          d = $urandom();
          xfer(32'h000 + 32'(4 * i), 1, d, r);
          xfer(32'h000 + 32'(4 * i), 0, 0, r);
          check(r == d, $sformatf("register %0d read back", i));
          check(waits == 1, "read with one wait state");
        end
        1: begin
          xfer(32'h100 + 32'(4 * i), 0, 0, r);
          check(r == rp_ref[i], $sformatf("pointer %0d read %h exp %h", i, r, rp_ref[i]));
          check(waits == 1, "read with one wait state");
        end
        2: begin
          xfer(32'h200 + 32'(4 * i), 1, 32'hFFFF_FFFF, r);   // read only: ignored
          xfer(32'h200 + 32'(4 * i), 0, 0, r);
          check(r == (32'hC000_0000 | 32'(i)), "counter region");
        end
        default: begin
          xfer(32'h300 + 32'(4 * i), 0, 0, r);
          check(r == (32'hD000_0000 | 32'(i)), "word-count region");
        end
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
