`timescale 1ps/1ps
// pipe_fork: autonomous processing block that forks a pipeline in two.
//
// Its rendezvous module has one input link and two output links. A local
// clock pulse needs the input token (new word here) and both output tokens
// (both consumers have taken the previous word). On the pulse the register
// loads the input word and the flow control logic sends all three tokens:
// the input one back, the same word forward on both outputs. The logic
// function (a plain register) and its reset value are this design's choice;
// the paper lists the fork only as a rendezvous-module configuration. As in
// the paper's resource table, one T flip-flop serves all three links.
//
// Interface: as pipe_stage, with out_req[k] / out_ack[k] for output k; both
// outputs carry out_data.
module pipe_fork
  import gals_pkg::*;
(
  input  logic       rst,
  input  logic       run,
  input  data_t      in_data,
  input  logic       in_req,
  output logic       in_ack,
  output data_t      out_data,
  output logic [1:0] out_req,
  input  logic [1:0] out_ack,
  output logic       clk
);
  logic [2:0] own_q;
  logic [2:0] token;

  gprm #(
    .N_LINKS  (3),
    .OWN_CH   ({8'd1, 8'd1, 8'd1}),
    .PEER_CH  ({8'd1, 8'd1, 8'd1}),
    .XNOR_SIDE(3'b110),
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
    else     out_data <= in_data;
  end

  assign in_ack  = own_q[0];
  assign out_req = own_q[2:1];
endmodule
