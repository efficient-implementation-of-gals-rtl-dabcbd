`timescale 1ps/1ps
// loop_link: the channels of a closed-loop link (behavioural model).
//
// Behavioural model, made of delay_unit models. A closed-loop link leads the
// parity of each of its N_CH flip-flops from a rendezvous module back to the
// same module, each channel through its own delay. Toggling a channel's
// flip-flop takes the loop token away until the parity change has crossed
// the delay, which sets the length of the next local clock cycle. The delay
// of the chosen channel must exceed the worst-case path through the block's
// own logic function. Having several channels lets the flow control logic
// pick the cycle length at run time.
//
// Interface: q[c] is the parity of the module's flip-flop for channel c,
// q_dly[c] the same parity after DELAY_PS[c] picoseconds.
module loop_link #(
  parameter int unsigned N_CH = 2,
  parameter logic [N_CH-1:0][31:0] DELAY_PS = {N_CH{32'd1000}},
  parameter int unsigned STAGE_PS = 250
) (
  input  logic [N_CH-1:0] q,
  output logic [N_CH-1:0] q_dly
);
  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    delay_unit #(.STAGES(int'(DELAY_PS[c]) / STAGE_PS), .STAGE_PS(STAGE_PS))
      u_dly (.din(q[c]), .dout(q_dly[c]));
  end
endmodule
