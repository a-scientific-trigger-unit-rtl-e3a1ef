// sync_fifo: single-clock first-word-fall-through FIFO.
//
// Helper used by the link controls and the raw photons buffer. The head
// entry is visible on rdata whenever empty is low; a read (rd) pops it in
// the same cycle. A write (wr) while full is dropped and reported by a
// one-cycle overflow pulse. A read and a write may happen in the same cycle.
// The storage is a plain array so that synthesis can map it to RAM.
module sync_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             wr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             rd,
  output logic [WIDTH-1:0] rdata,
  output logic             empty,
  output logic             full,
  output logic [$clog2(DEPTH+1)-1:0] level,
  output logic             overflow
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic [$clog2(DEPTH+1)-1:0] cnt;

  logic do_wr, do_rd;
  assign empty    = (cnt == 0);
  assign full     = (cnt == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign do_rd    = rd && !empty;
  assign do_wr    = wr && (!full || do_rd);
  assign rdata    = mem[rp];
  assign level    = cnt;
  assign overflow = wr && full && !do_rd;

  function automatic logic [AW-1:0] incr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; cnt <= '0;
    end else if (clear) begin
      wp <= '0; rp <= '0; cnt <= '0;
    end else begin
      if (do_wr) wp <= incr(wp);
      if (do_rd) rp <= incr(rp);
      cnt <= cnt + $bits(cnt)'(do_wr) - $bits(cnt)'(do_rd);
    end
  end
endmodule
