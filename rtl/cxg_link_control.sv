// cxg_link_control: receiver of one camera (CXG) serial link.
//
// The link carries one bit per CXG clock period. It idles low; a photon is a
// start bit (1) followed by the 32 bits of the raw photon, most significant
// bit first. The bit is sampled in the PCI-clock cycle flagged by `sample`,
// which marks the rising edge of the CXG clock this FPGA sends to the camera,
// so no clock-domain crossing is needed. Complete photons are queued in a
// small FIFO that the link arbiter drains (first-word-fall-through: `valid`,
// `data`, `pop`). A photon arriving with the FIFO full is dropped and sets
// the sticky `overflow` flag until `clear`.
//
// The paper names this block and says each link delivers 32-bit photons;
// the serial framing, the FIFO and the overflow flag are this design's own.
module cxg_link_control
  import els_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        enable,
  input  logic        sample,
  input  logic        link,
  input  logic        clear,
  output logic        valid,
  output raw_photon_t data,
  input  logic        pop,
  output logic        overflow
);
  logic [31:0] shreg;
  logic [5:0]  nbits;   // 0: waiting for start bit, else bits still to receive + 1
  logic        push;
  logic        empty, full, ovf;
  logic [$clog2(FIFO_DEPTH+1)-1:0] level;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg <= '0; nbits <= '0; push <= 1'b0;
    end else begin
      push <= 1'b0;
      if (!enable) begin
        nbits <= '0;
      end else if (sample) begin
        if (nbits == 0) begin
          if (link) nbits <= 6'd32;
        end else begin
          shreg <= {shreg[30:0], link};
          nbits <= nbits - 1'b1;
          if (nbits == 6'd1) push <= 1'b1;
        end
      end
    end
  end

  sync_fifo #(.WIDTH(32), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .clear(1'b0), .wr(push), .wdata(shreg), .rd(pop),
    .rdata(data), .empty, .full, .level, .overflow(ovf)
  );
  assign valid = !empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      overflow <= 1'b0;
    else if (clear)  overflow <= 1'b0;
    else if (ovf)    overflow <= 1'b1;
  end
endmodule
