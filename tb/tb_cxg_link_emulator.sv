// tb_cxg_link_emulator: decodes the emulated link (start bit, 32 bits) at
// each sample slot, checks the word and the spacing between photon starts,
// and checks pass-through of the external link when disabled.
module tb_cxg_link_emulator;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic enable = 0, sample = 0, ext_link = 0, link;
  logic [31:0] word = 32'h1234_5678;
  logic [15:0] period = 16'd40;

  cxg_link_emulator dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always_ff @(posedge clk) sample <= !sample;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // receiver: counts slots between start bits
  int slot = 0, last_start = -1, nbits = 0, nwords = 0;
  logic [31:0] sh;
  int exp_gap;
  always @(posedge clk) if (rst_n && enable && sample) begin
    if (nbits == 0) begin
      if (link) begin
        if (last_start >= 0) begin
          checks++;
          if (slot - last_start != exp_gap) begin
            failures++; $display("FAIL: gap %0d exp %0d", slot - last_start, exp_gap);
          end
        end
        last_start = slot;
        nbits = 32;
      end
    end else begin
      sh = {sh[30:0], link};
      nbits--;
      if (nbits == 0) begin
        checks++; nwords++;
        if (sh != word) begin failures++; $display("FAIL: word %h exp %h", sh, word); end
      end
    end
    slot++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // pass-through while disabled
    for (int i = 0; i < 20; i++) begin
      @(negedge clk); ext_link = $urandom_range(1, 0); #1;
      check(link == ext_link, "pass-through");
    end
    ext_link = 1;   // ignored once enabled
    @(negedge clk); enable = 1; exp_gap = 40;
    repeat (40 * 2 * 10) @(negedge clk);
    check(nwords >= 9, "photons at period 40");
    // period shorter than a photon: back to back (33 slots)
    enable = 0; last_start = -1; nbits = 0; nwords = 0;
    period = 16'd5; word = 32'hCAFE_F00D; exp_gap = 33;
    @(negedge clk); enable = 1;
    repeat (33 * 2 * 10) @(negedge clk);
    check(nwords >= 9, "back-to-back photons");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
