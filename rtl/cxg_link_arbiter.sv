// cxg_link_arbiter: round-robin merge of the link FIFOs.
//
// Each cycle at most one photon moves from a link FIFO to the raw photons
// buffer. The link granted is the first one holding a photon at or after
// the rotating priority pointer; the pointer then moves just past it, so a
// busy link cannot starve the others. The photon is tagged with its link
// number. Nothing moves while `out_ready` (raw buffer not full) is low.
//
// The paper names the arbiter between the 8 link controls and the raw
// photons buffer; round-robin is this design's choice.
module cxg_link_arbiter
  import els_pkg::*;
#(
  parameter int unsigned N = N_LINKS
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [N-1:0]    in_valid,
  input  raw_photon_t     in_data [N],
  output logic [N-1:0]    in_pop,
  output logic            out_valid,
  output tagged_photon_t  out_data,
  input  logic            out_ready
);
  localparam int unsigned LW = (N > 1) ? $clog2(N) : 1;
  logic [LW-1:0] ptr, sel;
  logic          found;

  always_comb begin
    found = 1'b0;
    sel   = ptr;
    for (int unsigned k = 0; k < N; k++) begin
      logic [LW-1:0] idx;
      idx = LW'((int'(ptr) + k) % N);
      if (!found && in_valid[idx]) begin
        found = 1'b1;
        sel   = idx;
      end
    end
  end

  always_comb begin
    in_pop = '0;
    if (found && out_ready) in_pop[sel] = 1'b1;
  end

  assign out_valid     = found && out_ready;
  assign out_data.link = 3'(sel);
  assign out_data.ph   = in_data[sel];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  ptr <= '0;
    else if (found && out_ready) ptr <= LW'((int'(sel) + 1) % N);
  end
endmodule
