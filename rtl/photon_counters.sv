// photon_counters: 36 photon counters, one per (energy strip, zone) pair.
//
// On `inc`, the counter of zone `zone` is incremented in every energy strip
// whose bit is set in `strips` (up to four counters in one cycle). The CPU
// reads them during the time-frame interrupt (counter index = 9*strip +
// zone, combinational read) and `clear`, issued when the CPU acknowledges
// the interrupt, zeroes them all, so each reading is the count of one time
// frame. Counters saturate instead of wrapping.
//
// The 36 x 32-bit counters and their per-frame hand-over follow the paper;
// clear-on-acknowledge and saturation are this design's choices.
module photon_counters
  import els_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic        inc,
  input  logic [3:0]  strips,
  input  logic [3:0]  zone,
  input  logic [5:0]  rd_idx,
  output logic [31:0] rd_data
);
  logic [31:0] cnt [N_COUNTERS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_COUNTERS; i++) cnt[i] <= '0;
    end else if (clear) begin
      for (int i = 0; i < N_COUNTERS; i++) cnt[i] <= '0;
    end else if (inc && zone < 4'(N_ZONES)) begin
      for (int s = 0; s < N_STRIPS; s++)
        if (strips[s] && cnt[s*N_ZONES + int'(zone)] != '1)
          cnt[s*N_ZONES + int'(zone)] <= cnt[s*N_ZONES + int'(zone)] + 1'b1;
    end
  end

  assign rd_data = (rd_idx < 6'(N_COUNTERS)) ? cnt[rd_idx] : '0;
endmodule
