`timescale 1ps/1ps
// seq_stage: autonomous processing block run as a sequential machine (the
// paper's "sequential machine controller" with a two-channel closed loop).
//
// Besides an input and an output link, its rendezvous module controls a
// closed-loop link: a token that leaves the module and comes back to it
// through one of two delay channels. When the block needs several clock
// cycles for one word, it keeps the input and output tokens and sends only
// the loop token; the pulse that follows each return of the loop token gives
// a burst of local clock cycles whose length is the delay of the channel the
// token took. The slow input picks the channel (0: LOOP_PS[0], 1: LOOP_PS[1]),
// which is the paper's run-time selection of the clock cycle length, driven
// for example by a temperature or supply monitor. LOOP_CH = 1 gives the
// single-channel loop (three T flip-flops, the smaller sequential-machine
// configuration of the paper's resource table); slow is then ignored and
// every cycle takes LOOP_PS[0]. The default, LOOP_CH = 2, has four.
//
// The logic function is this design's choice, sized to need a burst:
// out = ITER * in by repeated addition.
//   pulse 1 (word arrives):  acc <= in,        send loop token
//   pulses 2..ITER-1:        acc <= acc + in,  send loop token
//   pulse ITER:              acc <= acc + in,  send input token back and the
//                                              output token forward
// With ITER = 1 the first pulse already sends the word on. The input word is
// used again on every pulse, which is why its token is kept until the last.
// Each loop channel delay must exceed the worst-case path through the adder.
//
// Interface: as pipe_stage; out_data is valid when the output token is
// sent. clk is the local clock, brought out for observation.
module seq_stage
  import gals_pkg::*;
#(
  parameter int unsigned ITER     = 4,
  parameter int unsigned LOOP_CH  = 2,
  parameter logic [1:0][31:0] LOOP_PS = {32'd2000, 32'd1000},
  parameter int unsigned STAGE_PS = 250
) (
  input  logic  rst,
  input  logic  run,
  input  logic  slow,
  input  data_t in_data,
  input  logic  in_req,
  output logic  in_ack,
  output data_t out_data,
  output logic  out_req,
  input  logic  out_ack,
  output logic  clk
);
  localparam int unsigned CNT_W = $clog2(ITER + 1);

  logic [2+LOOP_CH-1:0] toggle, own_q;
  logic [LOOP_CH-1:0]   loop_dly;
  int unsigned          loop_sel;
  logic [2:0] token;

  logic             busy, busy_d;
  logic [CNT_W-1:0] cnt, cnt_d;
  data_t            acc, acc_d;

  // Links: 0 input (XOR side), 1 output (XNOR side), 2 closed loop (XNOR,
  // LOOP_CH channels). Own flip-flops: [0] input, [1] output, then the loop.
  gprm #(
    .N_LINKS  (3),
    .OWN_CH   ({8'(LOOP_CH), 8'd1, 8'd1}),
    .PEER_CH  ({8'(LOOP_CH), 8'd1, 8'd1}),
    .XNOR_SIDE(3'b110)
  ) u_gprm (
    .rst, .run, .toggle, .own_q,
    .peer_q({loop_dly, out_ack, in_req}),
    .token, .clk
  );

  loop_link #(.N_CH(LOOP_CH), .DELAY_PS(LOOP_PS[LOOP_CH-1:0]), .STAGE_PS(STAGE_PS))
    u_loop (.q(own_q[2 +: LOOP_CH]), .q_dly(loop_dly));

  // Loop channel of the next cycle: slow picks the second one, if there is one.
  assign loop_sel = (LOOP_CH > 1 && slow) ? 1 : 0;

  // Logic function and flow control logic, both from the same arguments.
  always_comb begin
    acc_d  = busy ? acc + in_data : in_data;
    cnt_d  = busy ? cnt - 1'b1 : CNT_W'(ITER - 1);
    busy_d = (cnt_d != '0);
    toggle = '0;
    if (busy_d) toggle[2 + loop_sel] = 1'b1;    // keep in/out, loop again
    else        toggle[1:0] = 2'b11;            // word done: hand it over
  end

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      busy <= 1'b0;
      cnt  <= '0;
      acc  <= '0;
    end else begin
      busy <= busy_d;
      cnt  <= cnt_d;
      acc  <= acc_d;
    end
  end

  assign out_data = acc;
  assign in_ack   = own_q[0];
  assign out_req  = own_q[1];
endmodule
