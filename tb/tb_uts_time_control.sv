// tb_uts_time_control: measures the spacing of frame ticks and swap ticks
// at short settings and at the 10 ms default (200000 cycles), and checks
// the frame counter and the reset on leaving acquisition.
module tb_uts_time_control;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic acq = 0;
  logic [31:0] frame_cycles = 32'd10;
  logic [15:0] swap_frames = 16'd3;
  logic frame_tick, swap_tick;
  logic [31:0] frame_count;

  uts_time_control dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint cyc = 0, last_frame = -1, last_swap = -1;
  int nframes = 0, nswaps = 0;
  always @(posedge clk) begin
    cyc++;
    if (frame_tick) begin
      if (last_frame >= 0) check(cyc - last_frame == longint'(frame_cycles), $sformatf("frame period %0d", cyc - last_frame));
      last_frame = cyc; nframes++;
      if (swap_tick) begin
        if (last_swap >= 0) check(cyc - last_swap == longint'(frame_cycles) * swap_frames, "swap period");
        last_swap = cyc; nswaps++;
      end
    end else check(!swap_tick, "swap tick only with a frame tick");
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); acq = 1;
    repeat (10 * 3 * 5) @(negedge clk);
    check(nframes == 15, $sformatf("15 frames, got %0d", nframes));
    check(nswaps == 5, $sformatf("5 swaps, got %0d", nswaps));
    check(frame_count == 15, "frame counter");
    acq = 0; @(negedge clk);
    check(frame_count == 0, "counter cleared out of acquisition");
    last_frame = -1; last_swap = -1;
    frame_cycles = 200000; swap_frames = 2;
    @(negedge clk); acq = 1;
    repeat (200000 * 4 + 5) @(negedge clk);
    check(frame_count == 4, "four 10 ms frames");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
