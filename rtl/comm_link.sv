`timescale 1ps/1ps
// comm_link: the channels of a communication link (behavioural model).
//
// Behavioural model, made of delay_unit models. A communication link joins
// two rendezvous modules and holds one token between them. It has N_FWD
// channels from the producer to the consumer and N_BWD channels back, each
// with its own delay. The flip-flops and the parity gates of the link sit in
// the two rendezvous modules; this module is what lies between them.
// Moving the token forward also hands over the producer's register value
// (bundled data), so every forward delay must exceed the worst-case data path
// between the two registers. Backward delays carry only the request for new
// data and have no such bound.
//
// Interface: fwd_q / fwd_dly are the producer's channel parities before and
// after their delays, bwd_q / bwd_dly the consumer's.
module comm_link #(
  parameter int unsigned N_FWD = 1,
  parameter int unsigned N_BWD = 1,
  parameter logic [N_FWD-1:0][31:0] FWD_PS = {N_FWD{32'd1000}},
  parameter logic [N_BWD-1:0][31:0] BWD_PS = {N_BWD{32'd1000}},
  parameter int unsigned STAGE_PS = 250
) (
  input  logic [N_FWD-1:0] fwd_q,
  output logic [N_FWD-1:0] fwd_dly,
  input  logic [N_BWD-1:0] bwd_q,
  output logic [N_BWD-1:0] bwd_dly
);
  for (genvar c = 0; c < N_FWD; c++) begin : g_fwd
    delay_unit #(.STAGES(int'(FWD_PS[c]) / STAGE_PS), .STAGE_PS(STAGE_PS))
      u_dly (.din(fwd_q[c]), .dout(fwd_dly[c]));
  end
  for (genvar c = 0; c < N_BWD; c++) begin : g_bwd
    delay_unit #(.STAGES(int'(BWD_PS[c]) / STAGE_PS), .STAGE_PS(STAGE_PS))
      u_dly (.din(bwd_q[c]), .dout(bwd_dly[c]));
  end
endmodule
