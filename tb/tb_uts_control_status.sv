// tb_uts_control_status: reset values, register write/read-back, acknowledge
// pulses, status bits, and the CXG clock / top-frame outputs.
module tb_uts_control_status;
  import els_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic we = 0;
  logic [5:0] addr = 0;
  logic [31:0] wdata = 0, rdata;
  cfg_t cfg;
  logic [3:0] ack;
  logic frozen = 0, overrun = 0, raw_overflow = 0, bus_error = 0, frame_tick = 0;
  logic [1:0] pending = 0;
  logic [7:0] link_overflow = 0;
  logic [31:0] frame_count = 32'd77;
  logic cxg_clk, sample, cxg_top_frame;

  uts_control_status #(.FRAME_CYCLES(200000), .SWAP_FRAMES(2048), .CXG_DIV(4)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic wr(input logic [5:0] a, input logic [31:0] d);
    @(negedge clk); we = 1; addr = a; wdata = d;
    @(negedge clk); we = 0;
  endtask

  task automatic chk_rd(input logic [5:0] a, input logic [31:0] exp, input string msg);
    addr = a; #1;
    check(rdata == exp, $sformatf("%s: read %h exp %h", msg, rdata, exp));
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int rises = 0, samples = 0;
  always @(posedge cxg_clk) rises++;
  always @(posedge clk) if (sample) begin
    samples++;
    check(!cxg_clk, "sample flags the cycle before the CXG clock rises");
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk_rd(R_FRAME_CYC, 200000, "frame length resets to 10 ms at 20 MHz");
    chk_rd(R_SWAP_FRAMES, 2048, "swap period resets to 2048 frames");
    chk_rd(R_CTRL, 0, "acquisition off after reset");
    check(cfg.thr[0] == 512 && cfg.thr[6] == 3584, "default thresholds");
    wr(R_CTRL, 32'h00A5_3C03);
    check(cfg.acq && cfg.layer && cfg.link_en == 8'h3C && cfg.emu_en == 8'hA5, "CTRL fields");
    chk_rd(R_CTRL, 32'h00A5_3C03, "CTRL read back");
    wr(R_THR01, 32'h0123_0456); wr(R_THR23, 32'h0789_0ABC); wr(R_THR45, 32'h0DEF_0111); wr(R_THR6, 32'h0000_0222);
    check(cfg.thr[0] == 12'h456 && cfg.thr[1] == 12'h123 && cfg.thr[2] == 12'hABC && cfg.thr[3] == 12'h789, "thresholds 0-3");
    check(cfg.thr[4] == 12'h111 && cfg.thr[5] == 12'hDEF && cfg.thr[6] == 12'h222, "thresholds 4-6");
    chk_rd(R_THR23, 32'h0789_0ABC, "threshold read back");
    wr(R_STRIP_MAP, 32'hDEAD_BEEF);
    check(cfg.strip_map[0] == 4'hF && cfg.strip_map[7] == 4'hD, "strip map");
    wr(R_ZONE_X, 32'h0000_3010); wr(R_ZONE_Y, 32'h0000_2A05);
    check(cfg.zone_x1 == 7'h10 && cfg.zone_x2 == 7'h30 && cfg.zone_y1 == 5 && cfg.zone_y2 == 7'h2A, "zones");
    chk_rd(R_ZONE_X, 32'h0000_3010, "zone read back");
    wr(R_FRAME_CYC, 32'd1234); wr(R_SWAP_FRAMES, 32'd9); wr(R_EMU_WORD, 32'hFEED_0001); wr(R_EMU_PERIOD, 32'd99);
    wr(R_IRQ_MASK, 32'd2);
    check(cfg.frame_cycles == 1234 && cfg.swap_frames == 9 && cfg.emu_word == 32'hFEED_0001 && cfg.emu_period == 99, "timing and emulator registers");
    check(cfg.irq_mask == 2'b10, "mask");
    chk_rd(R_IRQ_MASK, 2, "mask read");
    chk_rd(R_FRAME_COUNT, 77, "frame count read");
    frozen = 1; pending = 2'b11; overrun = 1; raw_overflow = 1; bus_error = 1; link_overflow = 8'h81;
    chk_rd(R_STATUS, 32'h0000_813F, "status");
    // acknowledge pulse lasts one cycle
    @(negedge clk); we = 1; addr = R_IRQ_ACK; wdata = 32'h5;
    @(negedge clk); we = 0;
    check(ack == 4'h5, "acknowledge pulse");
    @(negedge clk);
    check(ack == 4'h0, "acknowledge pulse is one cycle");
    // CXG clock: PCI clock / 4
    rises = 0; samples = 0;
    repeat (400) @(negedge clk);
    check(rises == 100 && samples == 100, $sformatf("CXG clock rises %0d samples %0d", rises, samples));
    // top frame lasts CXG_DIV cycles
    @(negedge clk); frame_tick = 1; @(negedge clk); frame_tick = 0;
    check(cxg_top_frame, "top frame raised");
    repeat (3) @(negedge clk);
    check(cxg_top_frame, "top frame held");
    @(negedge clk);
    check(!cxg_top_frame, "top frame one CXG clock long");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
