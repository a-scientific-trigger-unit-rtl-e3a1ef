// tb_cxg_link_arbiter: 8 modelled link queues with random arrivals and a
// randomly stalling consumer. Checks each photon comes out once with the
// right link tag, per-link order, and round-robin fairness: with all
// links busy, grants go 0,1,...,7,0,...
module tb_cxg_link_arbiter;
  import els_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [7:0] in_valid, in_pop;
  raw_photon_t in_data [8];
  logic out_valid, out_ready = 0;
  tagged_photon_t out_data;
  raw_photon_t lq [8][$];
  int last_link = -1;
  bit all_busy_phase = 0;

  cxg_link_arbiter #(.N(8)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always_comb
    for (int i = 0; i < 8; i++) begin
      in_valid[i] = lq[i].size() > 0;
      in_data[i]  = (lq[i].size() > 0) ? lq[i][0] : '0;
    end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (out_valid) begin
      int l;
      l = int'(out_data.link);
      check(in_pop == (8'b1 << l), "pop matches tag");
      check(lq[l].size() > 0 && out_data.ph == lq[l][0], "data of the tagged link");
      if (all_busy_phase && last_link >= 0) check(l == (last_link + 1) % 8, "round robin");
      last_link = l;
      void'(lq[l].pop_front());
    end else begin
      check(in_pop == 0, "no pop without output");
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    // random phase
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      out_ready = $urandom_range(3, 0) != 0;
      for (int i = 0; i < 8; i++)
        if ($urandom_range(15, 0) == 0) lq[i].push_back(raw_photon_t'($urandom()));
    end
    // all links busy: strict rotation
    @(negedge clk); out_ready = 0;
    for (int i = 0; i < 8; i++) repeat (20) lq[i].push_back(raw_photon_t'($urandom()));
    @(negedge clk); all_busy_phase = 1; last_link = -1; out_ready = 1;
    repeat (100) @(negedge clk);
    all_busy_phase = 0;
    repeat (300) @(negedge clk);
    for (int i = 0; i < 8; i++) check(lq[i].size() == 0, "queue drained");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
