// raw_photons_buffer: FIFO between the link arbiter and data processing.
//
// It absorbs photon bursts and, above all, keeps photons while the readout
// is frozen for the time-frame interrupt: `freeze` blocks `rd`, so the CPU
// sees word counts and counters that do not move while it reads them.
// Writes continue during the freeze. First-word-fall-through: `rdata` is
// valid while `empty` is low. A write with the buffer full is lost and sets
// the sticky `overflow` flag until `clear`.
//
// The paper names the buffer and the freeze of its readout; the depth
// (RAW_BUF_DEPTH photons) is this design's choice.
module raw_photons_buffer
  import els_pkg::*;
#(
  parameter int unsigned DEPTH = 512
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           freeze,
  input  logic           clear,
  input  logic           wr,
  input  tagged_photon_t wdata,
  output logic           full,
  input  logic           rd,
  output tagged_photon_t rdata,
  output logic           empty,
  output logic [$clog2(DEPTH+1)-1:0] level,
  output logic           overflow
);
  logic ovf;
  sync_fifo #(.WIDTH($bits(tagged_photon_t)), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n, .clear(1'b0), .wr, .wdata, .rd(rd && !freeze),
    .rdata, .empty, .full, .level, .overflow(ovf)
  );
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     overflow <= 1'b0;
    else if (clear) overflow <= 1'b0;
    else if (ovf)   overflow <= 1'b1;
  end
endmodule
