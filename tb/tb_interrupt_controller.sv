// tb_interrupt_controller: freeze on frame tick, interrupt only once
// processing is idle, unfreeze on acknowledge, swap interrupt, overrun
// flag and masking.
module tb_interrupt_controller;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic frame_tick = 0, swap_tick = 0, proc_idle = 1;
  logic [2:0] ack = 0;
  logic [1:0] mask = 2'b11;
  logic freeze, overrun;
  logic [1:0] pending, irq;

  interrupt_controller dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic pulse_tick(input bit swap);
    @(negedge clk); frame_tick = 1; swap_tick = swap;
    @(negedge clk); frame_tick = 0; swap_tick = 0;
  endtask

  task automatic do_ack(input logic [2:0] a);
    @(negedge clk); ack = a;
    @(negedge clk); ack = 0;
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    check(!freeze && irq == 0, "quiet after reset");
    // processing busy when the frame ends
    proc_idle = 0;
    pulse_tick(0);
    check(freeze, "freeze raised at frame tick");
    repeat (5) @(negedge clk);
    check(irq == 0, "no interrupt while a photon is in flight");
    proc_idle = 1;
    @(negedge clk); @(negedge clk);
    check(irq == 2'b01, "interrupt 0 once idle");
    check(freeze, "still frozen until acknowledge");
    do_ack(3'b001);
    check(!freeze && irq == 0, "unfrozen and cleared by acknowledge");
    // swap period
    pulse_tick(1);
    @(negedge clk);
    check(irq == 2'b11, "both interrupts at a swap frame");
    do_ack(3'b001);
    check(irq == 2'b10, "swap interrupt stays until its own acknowledge");
    do_ack(3'b010);
    check(irq == 2'b00, "swap interrupt cleared");
    // overrun
    pulse_tick(0);
    @(negedge clk);
    pulse_tick(0);
    check(overrun, "overrun when a frame ends unacknowledged");
    do_ack(3'b101);
    check(!overrun && !freeze, "overrun and freeze cleared");
    // mask
    mask = 2'b00;
    pulse_tick(0);
    @(negedge clk);
    check(pending[0] && irq == 0, "masked interrupt pending but not signalled");
    do_ack(3'b001);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
