// tb_photon_classifier: random photons and random settings against a
// reference model of band, strip and zone in the testbench.
module tb_photon_classifier;
  import els_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  raw_photon_t      ph;
  logic [6:0][11:0] thr;
  logic [7:0][3:0]  strip_map;
  logic [6:0]       zx1, zx2, zy1, zy2;
  class_t           cls;
  prep_photon_t     prep;

  photon_classifier dut (.ph, .thr, .strip_map, .zone_x1(zx1), .zone_x2(zx2), .zone_y1(zy1),
                         .zone_y2(zy2), .cls, .prep);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      int e_band, x, y, c, r, base;
      // ascending thresholds
      base = 0;
      for (int i = 0; i < 7; i++) begin
        base += $urandom_range(500, 1);
        thr[i] = 12'(base);
      end
      strip_map = {$urandom(), $urandom()};
      zx1 = 7'($urandom_range(40, 1)); zx2 = 7'($urandom_range(79, 41));
      zy1 = 7'($urandom_range(40, 1)); zy2 = 7'($urandom_range(79, 41));
      ph.pixel  = 13'($urandom_range(6399, 0));
      ph.energy = 12'($urandom());
      ph.tstamp = 7'($urandom());
      if (n < 8) ph.energy = thr[n % 7] - 12'(n / 7);   // band edges
      #1;
      e_band = 0;
      for (int i = 0; i < 7; i++) if (ph.energy >= thr[i]) e_band = i + 1;
      x = ph.pixel % 80; y = ph.pixel / 80;
      c = (x < zx1) ? 0 : (x < zx2) ? 1 : 2;
      r = (y < zy1) ? 0 : (y < zy2) ? 1 : 2;
      check(cls.eband == 3'(e_band), $sformatf("band %0d exp %0d (E=%0d)", cls.eband, e_band, ph.energy));
      check(cls.strips == strip_map[e_band], "strip mask");
      check(cls.zone == 4'(3 * r + c), $sformatf("zone %0d exp %0d (pix %0d)", cls.zone, 3 * r + c, ph.pixel));
      check(prep == {ph.pixel, 3'(e_band)}, "preprocessed photon");
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
