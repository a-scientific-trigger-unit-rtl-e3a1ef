// uts_time_control: time-frame and shadowgram-period generator.
//
// While acquisition is on, a cycle counter divides the PCI clock into time
// frames of `frame_cycles` cycles (10 ms: 200000 cycles at 20 MHz). At the
// last cycle of each frame `frame_tick` pulses and the frame counter
// advances. Every `swap_frames` frames (2048 frames = 20.48 s) `swap_tick`
// pulses together with `frame_tick`: the period at which the CPU swaps the
// two shadowgram layers. Leaving acquisition resets the counters.
//
// The 10 ms frames and the 20.48 s swap period come from the paper; the
// counter structure is this design's.
module uts_time_control (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        acq,
  input  logic [31:0] frame_cycles,
  input  logic [15:0] swap_frames,
  output logic        frame_tick,
  output logic        swap_tick,
  output logic [31:0] frame_count
);
  logic [31:0] cyc;
  logic [15:0] sw;

  assign frame_tick = acq && (cyc + 1 >= frame_cycles);
  assign swap_tick  = frame_tick && (sw + 1 >= swap_frames);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cyc <= '0; sw <= '0; frame_count <= '0;
    end else if (!acq) begin
      cyc <= '0; sw <= '0; frame_count <= '0;
    end else if (frame_tick) begin
      cyc <= '0;
      frame_count <= frame_count + 1'b1;
      sw <= swap_tick ? '0 : sw + 1'b1;
    end else begin
      cyc <= cyc + 1'b1;
    end
  end
endmodule
