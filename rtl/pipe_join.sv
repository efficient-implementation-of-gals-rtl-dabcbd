`timescale 1ps/1ps
// pipe_join: autonomous processing block that joins two pipelines into one.
//
// Its rendezvous module has two input links and one output link. A local
// clock pulse needs both input tokens (a word on each input) and the output
// token (the consumer has taken the previous result). On the pulse the
// register loads in_data[0] + in_data[1] and the flow control logic sends all
// three tokens: both input ones back, the output one forward. The logic
// function (a sum) and its reset value are this design's choice; the paper
// lists the join only as a rendezvous-module configuration. As in the
// paper's resource table, one T flip-flop serves all three links.
//
// Interface: as pipe_stage, with in_data[k], in_req[k], in_ack[k] for input k.
module pipe_join
  import gals_pkg::*;
(
  input  logic       rst,
  input  logic       run,
  input  data_t      in_data [2],
  input  logic [1:0] in_req,
  output logic [1:0] in_ack,
  output data_t      out_data,
  output logic       out_req,
  input  logic       out_ack,
  output logic       clk
);
  logic [2:0] own_q;
  logic [2:0] token;

  gprm #(
    .N_LINKS  (3),
    .OWN_CH   ({8'd1, 8'd1, 8'd1}),
    .PEER_CH  ({8'd1, 8'd1, 8'd1}),
    .XNOR_SIDE(3'b100),
    .SINGLE_TFF(1'b1)
  ) u_gprm (
    .rst, .run,
    .toggle(3'b111),
    .own_q,
    .peer_q({out_ack, in_req}),
    .token, .clk
  );

  always_ff @(posedge clk or posedge rst) begin
    if (rst) out_data <= '0;
    else     out_data <= in_data[0] + in_data[1];
  end

  assign in_ack  = own_q[1:0];
  assign out_req = own_q[2];
endmodule
