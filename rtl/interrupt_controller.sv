// interrupt_controller: freeze / interrupt / unfreeze handshake with the CPU.
//
// At each `frame_tick` it raises `freeze`, which stops the readout of the
// raw photons buffer. As soon as data processing reports `proc_idle` (the
// photon in flight has been fully written to SDRAM), interrupt 0 is
// raised: word counts and counters are now stable. The CPU reads them and
// writes the acknowledge (`ack[0]`), which drops `freeze` and interrupt 0.
// A `swap_tick` (shadowgram swap period) also raises interrupt 1 at that
// point; `ack[1]` clears it. A frame tick that comes while the previous
// frame is still unacknowledged sets the sticky `overrun` flag, cleared by
// `ack[2]`. Each line is gated by its bit in `mask`.
//
// Freeze, interrupt and unfreeze-by-the-interrupt-routine follow the paper;
// the meaning of the second interrupt line and the overrun flag are this
// design's own.
module interrupt_controller (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       frame_tick,
  input  logic       swap_tick,
  input  logic       proc_idle,
  input  logic [2:0] ack,
  input  logic [1:0] mask,
  output logic       freeze,
  output logic [1:0] pending,
  output logic       overrun,
  output logic [1:0] irq
);
  logic swap_seen;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      freeze <= 1'b0; pending <= '0; overrun <= 1'b0; swap_seen <= 1'b0;
    end else begin
      if (frame_tick) begin
        if (freeze) overrun <= 1'b1;
        freeze <= 1'b1;
        if (swap_tick) swap_seen <= 1'b1;
      end else if (ack[0]) begin
        freeze <= 1'b0;
      end
      if (ack[0]) pending[0] <= 1'b0;
      else if (freeze && proc_idle && !pending[0]) begin
        pending[0] <= 1'b1;
        if (swap_seen) begin
          pending[1] <= 1'b1;
          swap_seen  <= 1'b0;
        end
      end
      if (ack[1]) pending[1] <= 1'b0;
      if (ack[2]) overrun <= 1'b0;
    end
  end

  assign irq = pending & mask;
endmodule
