`timescale 1ps/1ps
// pipe_stage: autonomous processing block used as one asynchronous pipeline
// stage (the paper's "pipeline stage controller").
//
// The block is a registered logic function (here: add the constant ADD to the
// input word) clocked by its own rendezvous module. The rendezvous module has
// one input link and one output link. A local clock pulse happens when the
// input token is here (new data has arrived) and the output token is here
// (the next stage has taken the previous value). On that pulse the register
// loads in_data + ADD and the flow control logic sends both tokens: the input
// one back (asking for the next word) and the output one forward (handing
// over the new word as bundled data).
//
// OUT_CH = 2 gives the output link two channels of different delay; the
// flow control logic then picks one per word with fcl_lfsr, which is the
// paper's spread-spectrum stage. OUT_CH = 1 is the plain stage.
//
// With one output channel the stage is the paper's minimal controller: one
// T flip-flop serves both links (both toggle on every pulse), so its output
// is at once the acknowledge going back and the request going forward. With
// two output channels each channel needs its own flip-flop (three in all).
// Reset values of the register and the LF function are this design's choice.
//
// Token placement at reset: IN_TOKEN = 1 puts the input link's token here
// (the link into this stage starts full), OUT_TOKEN = 0 puts the output
// link's token at the consumer (the link out of this stage starts full).
// The two ends of one link must agree: a producer with OUT_TOKEN = 0 feeds a
// consumer with IN_TOKEN = 1. A stage with both tokens at reset fires as soon
// as run rises, which is the case the paper's force-to-zero signal is for;
// ring pipelines need one.
//
// Interface: in_req is the producer's channel parity after its delay, in_ack
// this block's parity going back; out_req are this block's output channel
// parities (to be delayed by the link), out_ack the consumer's parity after
// its delay. By default the input link is the XOR side and the output link
// the XNOR side, so after reset the stage is empty and waits for data. clk is the local
// clock, brought out for observation.
module pipe_stage
  import gals_pkg::*;
#(
  parameter int unsigned OUT_CH = 1,
  parameter data_t       ADD    = data_t'(1),
  parameter logic [7:0]  SEED   = 8'hA5,
  parameter bit          IN_TOKEN  = 1'b0,
  parameter bit          OUT_TOKEN = 1'b1
) (
  input  logic              rst,
  input  logic              run,
  input  data_t             in_data,
  input  logic              in_req,
  output logic              in_ack,
  output data_t             out_data,
  output logic [OUT_CH-1:0] out_req,
  input  logic              out_ack,
  output logic              clk
);
  localparam int unsigned N_OWN = 1 + OUT_CH;

  logic [N_OWN-1:0] toggle, own_q;
  logic [1:0]       token;
  logic             sel;

  gprm #(
    .N_LINKS  (2),
    .OWN_CH   ({8'(OUT_CH), 8'd1}),
    .PEER_CH  ({8'd1, 8'd1}),
    .XNOR_SIDE({OUT_TOKEN, IN_TOKEN}),
    .SINGLE_TFF(OUT_CH == 1)
  ) u_gprm (
    .rst, .run, .toggle, .own_q,
    .peer_q({out_ack, in_req}),
    .token, .clk
  );

  // Flow control logic: return the input token and send the output token on
  // every pulse; with two output channels, choose one pseudo-randomly.
  if (OUT_CH == 1) begin : g_single
    assign sel    = 1'b0;
    assign toggle = 2'b11;
  end else begin : g_spread
    fcl_lfsr #(.SEED(SEED)) u_fcl (.clk, .rst, .sel);
    always_comb begin
      toggle    = '0;
      toggle[0] = 1'b1;
      toggle[1 + int'(sel)] = 1'b1;
    end
  end

  // Registered logic function.
  always_ff @(posedge clk or posedge rst) begin
    if (rst) out_data <= '0;
    else     out_data <= in_data + ADD;
  end

  assign in_ack  = own_q[0];
  assign out_req = own_q[N_OWN-1:1];
endmodule
