// tb_raw_photons_buffer: random writes and reads with freeze windows;
// checks order, that nothing leaves while frozen, and the overflow flag.
module tb_raw_photons_buffer;
  import els_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int DEPTH = 16;
  logic freeze = 0, clear = 0, wr = 0, rd = 0;
  tagged_photon_t wdata = '0, rdata;
  logic full, empty, overflow;
  logic [$clog2(DEPTH+1)-1:0] level;
  tagged_photon_t q [$];

  raw_photons_buffer #(.DEPTH(DEPTH)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int frozen_cycles = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      freeze = ((n / 200) % 3 == 2);
      wr = ($urandom_range(1, 0) == 1) && !full;
      rd = ($urandom_range(1, 0) == 1);
      wdata = tagged_photon_t'({$urandom(), $urandom()});
      #1;
      check(empty == (q.size() == 0), "empty flag");
      check(level == $bits(level)'(q.size()), "level");
      if (!empty) check(rdata == q[0], "head data in order");
      @(posedge clk);
      if (rd && !freeze && q.size() > 0) void'(q.pop_front());
      if (rd && freeze) frozen_cycles++;
      if (wr) q.push_back(wdata);
    end
    check(frozen_cycles > 0, "freeze exercised");
    // overflow: fill while frozen
    @(negedge clk); freeze = 1; rd = 0;
    while (!full) begin wr = 1; wdata = '1; @(negedge clk); end
    check(!overflow, "no overflow before a write to a full buffer");
    wr = 1; @(negedge clk); wr = 0; #1;
    check(overflow, "overflow flag set");
    clear = 1; @(negedge clk); clear = 0; #1;
    check(!overflow, "overflow flag cleared");
    check(full, "still full after clear of the flag");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
