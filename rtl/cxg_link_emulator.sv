// cxg_link_emulator: optional photon source in front of one link control.
//
// With `enable` low the external camera link passes straight through. With
// `enable` high the external link is ignored and the emulator sends the
// CPU-programmed raw photon `word` on the link, framed like the camera
// does (start bit, then 32 bits MSB first, one bit per `sample` slot),
// starting a new photon every `period` bit slots (at least 33: a shorter
// period is stretched to back-to-back photons). It lets the whole
// processing chain run without a camera.
//
// The paper only names one emulator per link; what it sends and when is this
// design's own choice.
module cxg_link_emulator (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        enable,
  input  logic        sample,
  input  logic        ext_link,
  input  logic [31:0] word,
  input  logic [15:0] period,
  output logic        link
);
  logic [32:0] shreg;    // start bit + photon, MSB first
  logic [15:0] slot;     // bit slots since the start of the current photon

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg <= '0; slot <= '0;
    end else if (!enable) begin
      shreg <= '0; slot <= '0;
    end else if (sample) begin
      if (slot == 0) begin
        shreg <= {1'b1, word};
      end else begin
        shreg <= {shreg[31:0], 1'b0};
      end
      if ((slot + 1'b1 >= period) && (slot >= 16'd32)) slot <= '0;
      else                                             slot <= slot + 1'b1;
    end
  end

  assign link = enable ? shreg[32] : ext_link;
endmodule
