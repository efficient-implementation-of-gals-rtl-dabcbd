`timescale 1ps/1ps
// delay_unit: behavioural model of the delay element of one channel.
//
// Behavioural model, not synthesizable logic. On an FPGA the delay element is
// usually a chain of latches (or any other placed delay), whose delay is a
// physical property of the placement and cannot be written as RTL. This model
// reproduces the timing only: STAGES identical stages, each passing a change
// of its input on after STAGE_PS picoseconds, as a gate or latch does. The
// total delay is STAGES * STAGE_PS. Like a real gate, a stage swallows a
// pulse shorter than its own delay; parity changes closer together than
// STAGE_PS are therefore lost. In the GALS protocol two toggles of the same
// channel are at least one token round trip apart, far more than one stage,
// so no token is ever lost this way. Changes further apart than STAGE_PS are
// all kept, even when several are in flight in the chain at once.
//
// Interface: din is the parity of the channel at the sending flip-flop, dout
// the same parity as seen by the receiving rendezvous module.
// Timing: dout follows din after STAGES * STAGE_PS ps. The stage count and
// stage delay are this design's choices; the paper gives no delay values.
module delay_unit #(
  parameter int unsigned STAGES   = 4,
  parameter int unsigned STAGE_PS = 250
) (
  input  logic din,
  output logic dout
);
  logic [STAGES:0] tap;

  assign tap[0] = din;

  for (genvar s = 0; s < STAGES; s++) begin : g_stage
    assign #(STAGE_PS) tap[s+1] = tap[s];
  end

  assign dout = tap[STAGES];
endmodule
