// ram_pointers: embedded RAM of SDRAM pointers, 64 words of 32 bits.
//
// Port A belongs to the CPU (through the AHB slave access): before an
// acquisition it loads, for each of the 8 raw-data rings and the photon
// ring, the base, end (exclusive) and current write pointer, and the base
// address of each shadowgram (2 layers x 4 strips); it can read them back
// at any time. Port B belongs to data processing, which reads the pointers
// of each photon's destinations and writes back the advanced ring
// pointers. Both ports read synchronously (data the cycle after `re`);
// if both write one word in the same cycle, port B wins.
//
// The paper says the CPU initialises the RAM pointer area and each
// processed datum looks up its SDRAM pointer there; the word map
// (els_pkg RP_*) and the two-port organisation are this design's.
module ram_pointers (
  input  logic        clk,
  input  logic        a_we,
  input  logic        a_re,
  input  logic [5:0]  a_addr,
  input  logic [31:0] a_wdata,
  output logic [31:0] a_rdata,
  input  logic        b_we,
  input  logic        b_re,
  input  logic [5:0]  b_addr,
  input  logic [31:0] b_wdata,
  output logic [31:0] b_rdata
);
  logic [31:0] mem [64];

  always_ff @(posedge clk) begin
    if (a_we && !(b_we && b_addr == a_addr)) mem[a_addr] <= a_wdata;
    if (b_we) mem[b_addr] <= b_wdata;
    if (a_re) a_rdata <= mem[a_addr];
    if (b_re) b_rdata <= mem[b_addr];
  end
endmodule
