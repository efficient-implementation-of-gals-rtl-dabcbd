`timescale 1ps/1ps
// gals_pipeline: a globally asynchronous, locally synchronous pipeline of
// autonomous processing blocks, each clocked by its own rendezvous module.
//
// There is no global clock. Every block generates its own clock pulses from
// the tokens of the links it controls, and the blocks hand words to each
// other over communication links whose channels are parity signals through
// delay elements (two-phase, bundled-data handshake). The arrangement puts
// every configuration of the rendezvous module the paper tabulates on one
// data path:
//
//   in --> DEPTH x pipe_stage (+1 each)
//      --> pipe_stage with a two-channel output link chosen pseudo-randomly
//          (+1; the spread-spectrum link)
//      --> pipe_fork --+--> seq_stage (x ITER, closed-loop clock burst) --+
//                      +--> pipe_stage (+1) --------------------------------+
//      --> pipe_join (sum) --> out
//
// so for an input word x the output word is, modulo 2^DATA_W,
//   y = ITER * (x + DEPTH + 1) + (x + DEPTH + 2).
// The topology and the logic functions are this design's choice; the paper's
// experiments use FIFO and ring pipelines of such blocks but do not give
// their contents.
//
// Delays: every channel is a chain of STAGE_PS delay stages. FWD_PS and
// BWD_PS are the forward and backward delays of the plain links, SPREAD_PS
// the two forward channels of the spread-spectrum link, LOOP_PS the two
// channels of the closed loop (slow selects the second). All values are
// assumptions; the paper gives no delays.
//
// Interface (the two ends of the pipeline are links, as in the paper's
// two-stage example): in_data with in_req, the producer's channel parity,
// already delayed past the data; in_ack, the parity this pipeline toggles to
// ask for the next word. out_data with out_req, toggled when a new word is
// on out_data (delay it before use); out_ack, toggled by the consumer when it
// has taken the word. rst clears all flip-flops, run enables every block's
// clock, slow picks the long closed-loop channel.
//
// Start-up: hold rst, with run low, for longer than the longest channel delay.
// A flip-flop that powered up at 1 and is then reset sends a parity change
// down its channel; it must have left the delay line before run rises, or it
// would arrive later as a false token.
module gals_pipeline
  import gals_pkg::*;
#(
  parameter int unsigned      DEPTH     = 4,
  parameter int unsigned      ITER      = 4,
  parameter int unsigned      STAGE_PS  = 250,
  parameter int unsigned      FWD_PS    = 1000,
  parameter int unsigned      BWD_PS    = 500,
  parameter logic [1:0][31:0] SPREAD_PS = {32'd1500, 32'd1000},
  parameter logic [1:0][31:0] LOOP_PS   = {32'd2000, 32'd1000}
) (
  input  logic  rst,
  input  logic  run,
  input  logic  slow,
  input  data_t in_data,
  input  logic  in_req,
  output logic  in_ack,
  output data_t out_data,
  output logic  out_req,
  input  logic  out_ack
);
  // Plain chain: stage k takes link k and drives link k+1. Link 0 is the
  // pipeline's input port; link DEPTH feeds the spread-spectrum stage.
  data_t d     [DEPTH+1];
  logic  req_d [DEPTH+1];   // ... after it
  logic  ack_q [DEPTH+1];   // consumer's parity before the backward delay
  logic  ack_d [DEPTH+1];   // ... after it

  assign d[0]     = in_data;
  assign req_d[0] = in_req;
  assign in_ack   = ack_q[0];
  assign ack_d[0] = 1'b0;

  for (genvar k = 0; k < DEPTH; k++) begin : g_stage
    logic clk;
    logic req_v;
    pipe_stage #(.OUT_CH(1), .ADD(data_t'(1))) u_stage (
      .rst, .run,
      .in_data(d[k]), .in_req(req_d[k]), .in_ack(ack_q[k]),
      .out_data(d[k+1]), .out_req(req_v), .out_ack(ack_d[k+1]),
      .clk
    );
    comm_link #(.N_FWD(1), .N_BWD(1), .FWD_PS(FWD_PS), .BWD_PS(BWD_PS),
                .STAGE_PS(STAGE_PS)) u_link (
      .fwd_q(req_v), .fwd_dly(req_d[k+1]),
      .bwd_q(ack_q[k+1]), .bwd_dly(ack_d[k+1])
    );
  end

  // Spread-spectrum stage: two forward channels of different delay.
  data_t      sp_data;
  logic [1:0] sp_req_q, sp_req_d;
  logic       sp_ack_q, sp_ack_d;
  logic       sp_clk;

  pipe_stage #(.OUT_CH(2), .ADD(data_t'(1))) u_spread (
    .rst, .run,
    .in_data(d[DEPTH]), .in_req(req_d[DEPTH]), .in_ack(ack_q[DEPTH]),
    .out_data(sp_data), .out_req(sp_req_q), .out_ack(sp_ack_d),
    .clk(sp_clk)
  );
  comm_link #(.N_FWD(2), .N_BWD(1), .FWD_PS(SPREAD_PS), .BWD_PS(BWD_PS),
              .STAGE_PS(STAGE_PS)) u_spread_link (
    .fwd_q(sp_req_q), .fwd_dly(sp_req_d),
    .bwd_q(sp_ack_q), .bwd_dly(sp_ack_d)
  );

  // Fork. The receiving side of the two-channel link is the fork's XOR gate
  // over both channels (the "additional LUT input" of the paper): either
  // channel's toggle moves the token, so the two are folded into one parity.
  data_t      fk_data;
  logic [1:0] fk_req_q, fk_req_d, fk_ack_q, fk_ack_d;
  logic       fk_clk;

  pipe_fork u_fork (
    .rst, .run,
    .in_data(sp_data), .in_req(^sp_req_d), .in_ack(sp_ack_q),
    .out_data(fk_data), .out_req(fk_req_q), .out_ack(fk_ack_d),
    .clk(fk_clk)
  );
  for (genvar b = 0; b < 2; b++) begin : g_fork_link
    comm_link #(.N_FWD(1), .N_BWD(1), .FWD_PS(FWD_PS), .BWD_PS(BWD_PS),
                .STAGE_PS(STAGE_PS)) u_link (
      .fwd_q(fk_req_q[b]), .fwd_dly(fk_req_d[b]),
      .bwd_q(fk_ack_q[b]), .bwd_dly(fk_ack_d[b])
    );
  end

  // Branch 0: sequential machine with a closed-loop link.
  data_t sq_data;
  logic  sq_req_q, sq_req_d, sq_ack_q, sq_ack_d;
  logic  sq_clk;

  seq_stage #(.ITER(ITER), .LOOP_PS(LOOP_PS), .STAGE_PS(STAGE_PS)) u_seq (
    .rst, .run, .slow,
    .in_data(fk_data), .in_req(fk_req_d[0]), .in_ack(fk_ack_q[0]),
    .out_data(sq_data), .out_req(sq_req_q), .out_ack(sq_ack_d),
    .clk(sq_clk)
  );
  comm_link #(.N_FWD(1), .N_BWD(1), .FWD_PS(FWD_PS), .BWD_PS(BWD_PS),
              .STAGE_PS(STAGE_PS)) u_seq_link (
    .fwd_q(sq_req_q), .fwd_dly(sq_req_d),
    .bwd_q(sq_ack_q), .bwd_dly(sq_ack_d)
  );

  // Branch 1: plain stage.
  data_t br_data;
  logic  br_req_q, br_req_d, br_ack_q, br_ack_d;
  logic  br_clk;

  pipe_stage #(.OUT_CH(1), .ADD(data_t'(1))) u_branch (
    .rst, .run,
    .in_data(fk_data), .in_req(fk_req_d[1]), .in_ack(fk_ack_q[1]),
    .out_data(br_data), .out_req(br_req_q), .out_ack(br_ack_d),
    .clk(br_clk)
  );
  comm_link #(.N_FWD(1), .N_BWD(1), .FWD_PS(FWD_PS), .BWD_PS(BWD_PS),
              .STAGE_PS(STAGE_PS)) u_branch_link (
    .fwd_q(br_req_q), .fwd_dly(br_req_d),
    .bwd_q(br_ack_q), .bwd_dly(br_ack_d)
  );

  // Join, driving the pipeline's output port.
  data_t jn_in [2];
  logic  jn_clk;

  assign jn_in[0] = sq_data;
  assign jn_in[1] = br_data;

  pipe_join u_join (
    .rst, .run,
    .in_data(jn_in), .in_req({br_req_d, sq_req_d}), .in_ack({br_ack_q, sq_ack_q}),
    .out_data, .out_req, .out_ack,
    .clk(jn_clk)
  );
endmodule
