// tb_cxg_link_control: serialises random photons onto the link (start bit,
// 32 bits MSB first, one bit per sample slot every 2 cycles) with random
// idle gaps and checks the words popped; then checks the overflow flag
// and that a disabled link receives nothing.
module tb_cxg_link_control;
  import els_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic enable = 0, sample = 0, link = 0, clear = 0, pop = 0;
  logic valid, overflow;
  raw_photon_t data;
  logic [31:0] q [$];

  cxg_link_control #(.FIFO_DEPTH(4)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // sample strobe every other cycle
  always_ff @(posedge clk) sample <= !sample;

  // drive a bit for one sample slot
  task automatic send_bit(input logic b);
    @(negedge clk); link = b;
    while (!sample) @(negedge clk);
    @(negedge clk);
  endtask

  task automatic send_word(input logic [31:0] w);
    send_bit(1'b1);
    for (int i = 31; i >= 0; i--) send_bit(w[i]);
    link = 0;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // consumer
  logic consume = 1;
  always @(negedge clk) begin
    pop = consume && valid;
  end
  always @(posedge clk) begin
    if (pop) begin
      if (q.size() == 0) begin checks++; failures++; $display("FAIL: unexpected photon"); end
      else begin
        logic [31:0] e;
        e = q.pop_front();
        checks++;
        if (data != e) begin failures++; $display("FAIL: got %h exp %h", data, e); end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1; enable = 1;
    for (int n = 0; n < 300; n++) begin
      logic [31:0] w;
      w = $urandom();
      q.push_back(w);
      send_word(w);
      repeat ($urandom_range(3, 0)) send_bit(1'b0);
    end
    repeat (10) @(negedge clk);
    check(q.size() == 0, "all photons received");
    check(!overflow, "no overflow while consumed");
    // overflow: stop consuming and send 6 photons into a 4-deep FIFO
    consume = 0;
    for (int n = 0; n < 6; n++) send_word(32'hA5A5_0000 + 32'(n));
    repeat (4) @(negedge clk);
    check(overflow, "overflow flag after 6 photons into 4 entries");
    consume = 1;
    for (int n = 0; n < 4; n++) q.push_back(32'hA5A5_0000 + 32'(n));
    repeat (10) @(negedge clk);
    check(q.size() == 0, "the 4 queued photons drained in order");
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    check(!overflow, "overflow cleared");
    // disabled: nothing arrives
    enable = 0;
    send_word(32'hFFFF_FFFF);
    repeat (10) @(negedge clk);
    check(!valid, "disabled link receives nothing");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
