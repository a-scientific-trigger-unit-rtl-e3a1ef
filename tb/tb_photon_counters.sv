// tb_photon_counters: random increments against a reference array, then
// read-back of all 36 counters and a clear.
module tb_photon_counters;
  import els_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear = 0, inc = 0;
  logic [3:0] strips = 0, zone = 0;
  logic [5:0] rd_idx = 0;
  logic [31:0] rd_data;
  int unsigned ref_cnt [36];

  photon_counters dut (.*);

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

  task automatic read_all();
    for (int i = 0; i < 36; i++) begin
      rd_idx = 6'(i); #1;
      check(rd_data == ref_cnt[i], $sformatf("counter %0d = %0d exp %0d", i, rd_data, ref_cnt[i]));
    end
  endtask

  initial begin
    foreach (ref_cnt[i]) ref_cnt[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      inc    = ($urandom_range(3, 0) != 0);
      strips = 4'($urandom());
      zone   = 4'($urandom_range(8, 0));
      if (inc) for (int s = 0; s < 4; s++) if (strips[s]) ref_cnt[s * 9 + zone]++;
    end
    @(negedge clk); inc = 0;
    read_all();
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    foreach (ref_cnt[i]) ref_cnt[i] = 0;
    read_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
