// tb_ram_pointers: writes on both ports, synchronous reads on both ports,
// and port B winning a same-address write collision.
module tb_ram_pointers;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic a_we = 0, a_re = 0, b_we = 0, b_re = 0;
  logic [5:0] a_addr = 0, b_addr = 0;
  logic [31:0] a_wdata = 0, b_wdata = 0, a_rdata, b_rdata;
  logic [31:0] ref_mem [64];

  ram_pointers dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill through port A
    for (int i = 0; i < 64; i++) begin
      @(negedge clk); a_we = 1; a_addr = 6'(i); a_wdata = $urandom(); ref_mem[i] = a_wdata;
    end
    @(negedge clk); a_we = 0;
    // random mixed traffic
    for (int n = 0; n < 2000; n++) begin
      logic [5:0] ra, rb;
      @(negedge clk);
      a_we = $urandom_range(1, 0); b_we = $urandom_range(1, 0);
      a_addr = 6'($urandom()); b_addr = ($urandom_range(3, 0) == 0) ? a_addr : 6'($urandom());
      a_wdata = $urandom(); b_wdata = $urandom();
      a_re = 0; b_re = 0;
      if (a_we) ref_mem[a_addr] = a_wdata;
      if (b_we) ref_mem[b_addr] = b_wdata;
      @(negedge clk);
      a_we = 0; b_we = 0;
      ra = 6'($urandom()); rb = 6'($urandom());
      a_re = 1; b_re = 1; a_addr = ra; b_addr = rb;
      @(negedge clk);
      a_re = 0; b_re = 0;
      check(a_rdata == ref_mem[ra], $sformatf("port A read %0d", ra));
      check(b_rdata == ref_mem[rb], $sformatf("port B read %0d", rb));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
