// tb_data_processing: data processing with a pointer RAM and an SDRAM model.
// Random photons from all links go through small rings that wrap many times;
// a reference model in the testbench predicts the final ring contents,
// write pointers, shadowgram counts (both layers), word counts, counter
// pulses and the raw stream. With a zero-wait bus it also checks the cycle
// count per photon (15 + 9 x strips), and it checks that nothing is taken
// while frozen.
module tb_data_processing;
  import els_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic acq = 0, freeze = 0, layer = 0, clear = 0;
  logic [6:0][11:0] thr;
  logic [7:0][3:0]  strip_map;
  logic buf_empty, buf_rd;
  tagged_photon_t buf_data;
  logic rp_re, rp_we, a_we = 0, a_re = 0;
  logic [5:0] rp_addr, a_addr = 0, wc_idx = 0;
  logic [31:0] rp_wdata, rp_rdata, a_wdata = 0, a_rdata, wc_data;
  logic cnt_inc, raw_valid, idle, bus_error;
  logic [3:0] cnt_strips, cnt_zone;
  logic [2:0] raw_link;
  logic [31:0] raw_data;
  ahb_m2s_t m2s;
  ahb_s2m_t s2m;
  int unsigned max_wait = 0;

  data_processing dut (
    .clk, .rst_n, .acq, .freeze, .layer, .thr, .strip_map,
    .zone_x1(7'd27), .zone_x2(7'd54), .zone_y1(7'd27), .zone_y2(7'd54),
    .buf_empty, .buf_data, .buf_rd, .rp_re, .rp_we, .rp_addr, .rp_wdata, .rp_rdata,
    .cnt_inc, .cnt_strips, .cnt_zone, .raw_valid, .raw_link, .raw_data,
    .clear, .wc_idx, .wc_data, .idle, .bus_error, .ahb_o(m2s), .ahb_i(s2m)
  );
  ram_pointers u_rp (.clk, .a_we, .a_re, .a_addr, .a_wdata, .a_rdata,
                     .b_we(rp_we), .b_re(rp_re), .b_addr(rp_addr), .b_wdata(rp_wdata), .b_rdata(rp_rdata));
  ahb_mem_model #(.MAX_WAIT(0)) u_mem0 (.clk, .rst_n, .ahb_i(m2s), .ahb_o());
  // the zero-wait model answers; the slow one is used in the second pass
  ahb_s2m_t s2m_slow, s2m_fast;
  ahb_mem_model #(.MAX_WAIT(3)) u_mem3 (.clk, .rst_n, .ahb_i(m2s), .ahb_o(s2m_slow));
  assign s2m_fast = u_mem0.ahb_o;
  assign s2m = (max_wait == 0) ? s2m_fast : s2m_slow;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // photon source (first-word-fall-through)
  tagged_photon_t src [$];
  assign buf_empty = (src.size() == 0);
  assign buf_data  = (src.size() > 0) ? src[0] : '0;

  localparam logic [31:0] RAW_B = 32'h1000_0000, PH_B = 32'h2000_0000, SH_B = 32'h3000_0000;
  localparam int RAW_WORDS = 5, PH_HALVES = 7;

  // reference model
  logic [31:0] ref_raw [8][RAW_WORDS];
  int          raw_pos [8];
  logic [15:0] ref_ph [PH_HALVES];
  int          ph_pos;
  int unsigned ref_sh [int unsigned];
  int unsigned ref_wc [9];
  int unsigned n_inc, n_raw, n_taken;
  tagged_photon_t stream [$];
  bit took = 0;   // the DUT took the head photon at the last clock edge

  function automatic int band_of(input logic [11:0] e);
    int b = 0;
    for (int i = 0; i < 7; i++) if (e >= thr[i]) b = i + 1;
    return b;
  endfunction

  task automatic rp_write(input int idx, input logic [31:0] v);
    @(negedge clk); a_we = 1; a_addr = 6'(idx); a_wdata = v;
    @(negedge clk); a_we = 0;
  endtask

  task automatic rp_read(input int idx, output logic [31:0] v);
    @(negedge clk); a_re = 1; a_addr = 6'(idx);
    @(negedge clk); a_re = 0; v = a_rdata;
  endtask

  function automatic logic [31:0] mem_peek(input logic [31:0] a);
    return (max_wait == 0) ? u_mem0.peek(a) : u_mem3.peek(a);
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (buf_rd) begin
      check(!freeze && acq, "photon taken only when running and not frozen");
      n_taken++;
      took = 1;
    end
    if (cnt_inc) n_inc++;
    if (raw_valid) begin
      n_raw++;
      check(stream.size() > 0 && {raw_link, raw_data} == stream[0], "raw stream in order");
      if (stream.size() > 0) void'(stream.pop_front());
    end
  end

  // per-photon cycle count with a zero-wait bus
  longint cyc = 0, last_pop = -1;
  int exp_period = 0, timed = 0;
  bit timing_on = 0;
  always @(posedge clk) begin
    cyc++;
    if (buf_rd) begin
      if (timing_on && last_pop >= 0) begin
        check(cyc - last_pop == exp_period, $sformatf("photon period %0d exp %0d", cyc - last_pop, exp_period));
        timed++;
      end
      last_pop = cyc;
      exp_period = 15 + 9 * $countones(strip_map[band_of(buf_data.ph.energy)]);
    end
  end

  task automatic run_pass(input int n, input bit with_freeze);
    for (int k = 0; k < n; k++) begin
      tagged_photon_t p;
      int b, l;
      p.link = 3'($urandom());
      p.ph.pixel = 13'($urandom_range(6399, 0));
      if (k % 5 == 0) p.ph.pixel = 13'($urandom_range(3, 0));   // pile up on a few pixels
      p.ph.energy = 12'($urandom());
      p.ph.tstamp = 7'($urandom());
      b = band_of(p.ph.energy);
      l = int'(p.link);
      ref_raw[l][raw_pos[l]] = p.ph; raw_pos[l] = (raw_pos[l] + 1) % RAW_WORDS;
      ref_ph[ph_pos] = {p.ph.pixel, 3'(b)}; ph_pos = (ph_pos + 1) % PH_HALVES;
      for (int s = 0; s < 4; s++)
        if (strip_map[b][s]) ref_sh[int'(SH_B + 32'(layer) * 32'h10_0000 + 32'(s) * 32'h8000 + 32'(p.ph.pixel) * 4)]++;
      ref_wc[l]++; ref_wc[8]++;
      src.push_back(p);
      stream.push_back(p);
    end
    while (src.size() > 0 || !idle) begin
      @(negedge clk);
      if (took) void'(src.pop_front());
      took = 0;
      if (with_freeze) freeze = ($urandom_range(7, 0) == 0);
    end
    freeze = 0;
    repeat (3) @(negedge clk);
  endtask

  task automatic check_all();
    logic [31:0] v;
    for (int l = 0; l < 8; l++) begin
      for (int w = 0; w < RAW_WORDS; w++)
        check(mem_peek(RAW_B + 32'(l) * 32'h100 + 32'(4 * w)) == ref_raw[l][w], $sformatf("raw ring %0d word %0d", l, w));
      rp_read(int'(RP_RAW_CUR) + l, v);
      check(v == RAW_B + 32'(l) * 32'h100 + 32'(4 * raw_pos[l]), $sformatf("raw pointer %0d", l));
    end
    for (int h = 0; h < PH_HALVES; h++) begin
      logic [31:0] w;
      logic [31:0] a;
      a = PH_B + 32'(2 * h);
      w = mem_peek(a);
      check((a[1] ? w[31:16] : w[15:0]) == ref_ph[h], $sformatf("photon ring entry %0d", h));
    end
    rp_read(int'(RP_PH_CUR), v);
    check(v == PH_B + 32'(2 * ph_pos), "photon ring pointer");
    foreach (ref_sh[a]) check(mem_peek(a) == ref_sh[a], $sformatf("shadowgram word %h = %0d exp %0d", a, mem_peek(a), ref_sh[a]));
    for (int i = 0; i < 9; i++) begin
      wc_idx = 6'(i); #1;
      check(wc_data == ref_wc[i], $sformatf("word count %0d = %0d exp %0d", i, wc_data, ref_wc[i]));
    end
    check(n_inc == n_taken && n_raw == n_taken, "one counter pulse and one raw word per photon");
    check(!bus_error, "no bus error");
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 7; i++) thr[i] = 12'((i + 1) * 512);
    strip_map = {4'b1001, 4'b1001, 4'b1101, 4'b1101, 4'b0111, 4'b0111, 4'b0011, 4'b0000};
    foreach (raw_pos[i]) raw_pos[i] = 0;
    foreach (ref_wc[i]) ref_wc[i] = 0;
    ph_pos = 0; n_inc = 0; n_raw = 0; n_taken = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int l = 0; l < 8; l++) begin
      rp_write(int'(RP_RAW_BASE) + l, RAW_B + 32'(l) * 32'h100);
      rp_write(int'(RP_RAW_END) + l, RAW_B + 32'(l) * 32'h100 + 4 * RAW_WORDS);
      rp_write(int'(RP_RAW_CUR) + l, RAW_B + 32'(l) * 32'h100);
    end
    rp_write(int'(RP_PH_BASE), PH_B);
    rp_write(int'(RP_PH_END), PH_B + 2 * PH_HALVES);
    rp_write(int'(RP_PH_CUR), PH_B);
    for (int ly = 0; ly < 2; ly++)
      for (int s = 0; s < 4; s++)
        rp_write(int'(RP_SHADOW) + 4 * ly + s, SH_B + 32'(ly) * 32'h10_0000 + 32'(s) * 32'h8000);
    // not in acquisition: nothing moves
    src.push_back('1);
    repeat (20) @(negedge clk);
    check(src.size() == 1 && idle, "idle out of acquisition");
    void'(src.pop_front());
    acq = 1;
    // pass 1: zero-wait bus, timing checked
    timing_on = 1;
    run_pass(300, 0);
    timing_on = 0;
    check(timed > 250, "per-photon timing measured");
    check_all();
    // pass 2: other layer, freezes
    layer = 1;
    run_pass(300, 1);
    check_all();
    // clear of word counts
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    foreach (ref_wc[i]) ref_wc[i] = 0;
    for (int i = 0; i < 9; i++) begin
      wc_idx = 6'(i); #1;
      check(wc_data == 0, "word counts cleared");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
