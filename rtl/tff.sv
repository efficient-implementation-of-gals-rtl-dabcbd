`timescale 1ps/1ps
// tff: T-type flip-flop holding the parity of one channel of a GALS link.
//
// Links between rendezvous modules carry tokens as parity changes (two-phase
// signalling). Each channel is driven by one of these flip-flops: when the
// flow control logic selects the channel (t = 1), the next rising edge of the
// local clock inverts q, and that transition travels down the channel.
// The flip-flops start at 0, so every link begins with even parity; this
// follows the paper. The asynchronous, active-high reset that puts them there
// is this design's choice.
//
// Interface: clk is the locally generated clock of the owning rendezvous
// module, rst clears q, t enables the toggle, q is the channel parity.
// Timing: q changes on the rising clk edge that sees t = 1.
module tff (
  input  logic clk,
  input  logic rst,
  input  logic t,
  output logic q
);
  always_ff @(posedge clk or posedge rst) begin
    if (rst)    q <= 1'b0;
    else if (t) q <= ~q;
  end
endmodule
