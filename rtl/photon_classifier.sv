// photon_classifier: energy band, energy strips and detector zone of a photon.
//
// Purely combinational. The energy band is the number of the seven band
// thresholds (`thr`, programmed in ascending order) that the photon energy
// reaches, so band 0 lies below thr[0] and band 7 at or above thr[6]. The
// energy strips a photon belongs to are looked up from its band in
// `strip_map` (4 bits per band, so strips may overlap). The detector plane
// of 80 x 80 pixels (pixel = 80*y + x) is cut into a 3 x 3 grid of zones
// by two column bounds and two row bounds; zone = 3*row + column. The
// 16-bit preprocessed photon is {pixel, band}.
//
// The paper gives the counts (8 bands, 4 strips, 9 zones) and the contents
// of the 16-bit photon; how bands, strips and zones are derived is not
// given, and the threshold / mask / grid scheme here is this design's own.
module photon_classifier
  import els_pkg::*;
(
  input  raw_photon_t      ph,
  input  logic [6:0][11:0] thr,
  input  logic [7:0][3:0]  strip_map,
  input  logic [6:0]       zone_x1,
  input  logic [6:0]       zone_x2,
  input  logic [6:0]       zone_y1,
  input  logic [6:0]       zone_y2,
  output class_t           cls,
  output prep_photon_t     prep
);
  logic [2:0]  band;
  logic [6:0]  x, y;
  logic [3:0]  col, row;

  always_comb begin
    band = '0;
    for (int i = 0; i < 7; i++)
      if (ph.energy >= thr[i]) band = band + 1'b1;
  end

  // 13-bit pixel number to (x, y) on the 80 x 80 plane.
  assign y = 7'(ph.pixel / 13'(DET_SIDE));
  assign x = 7'(ph.pixel - 13'(y) * 13'(DET_SIDE));

  assign col = (x < zone_x1) ? 4'd0 : (x < zone_x2) ? 4'd1 : 4'd2;
  assign row = (y < zone_y1) ? 4'd0 : (y < zone_y2) ? 4'd1 : 4'd2;

  assign cls.eband  = band;
  assign cls.strips = strip_map[band];
  assign cls.zone   = 4'(row * 4'd3 + col);
  assign cls.pixel  = ph.pixel;
  assign prep.pixel = ph.pixel;
  assign prep.eband = band;
endmodule
