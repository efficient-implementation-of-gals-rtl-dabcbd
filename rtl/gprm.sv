`timescale 1ps/1ps
// gprm: General Purpose Rendezvous Module, the clock generator of one
// autonomous processing block (APB) in a GALS system.
//
// The module controls N_LINKS links. Each link is one of:
//   * an input link (a token here means: new input data has arrived),
//   * an output link (a token here means: the consumer wants a new value),
//   * a closed-loop link (a token here means: the value just registered has
//     crossed the block's own feedback path).
// A link is built from T flip-flops on both of its sides (one per channel
// leaving that side) and a parity gate per side. This module holds the
// flip-flops of its own side (int'(OWN_CH[l]) per link) and sees the peer side's
// flip-flops through the channel delays (int'(PEER_CH[l]) per link; for a
// closed-loop link these are its own flip-flops delayed). Link l is evaluated
// with XNOR if XNOR_SIDE[l] is 1, otherwise with XOR, over its own and its
// peer's channel parities: a 1 means the token is here. With all flip-flops
// at 0 the token thus starts on the XNOR side; a closed-loop link is always
// an XNOR side.
//
// The local clock is the AND of all token-present signals. When every token
// is here the clock rises; that edge clocks the block's register and the T
// flip-flops whose toggle enables the flow control logic has raised. Each
// toggled flip-flop sends its link's token away, so the AND falls again: the
// clock pulse is as wide as the clock-to-output and gate delays. The block
// must send at least one token on every clock (asserted below), and at most
// one channel of a link may toggle at once, or the two parity changes would
// cancel (also asserted).
//
// SINGLE_TFF = 1 gives the minimal form of the paper's two-stage example and
// resource table: a block whose flow control logic sends every token on every
// pulse (plain stage, fork, join) needs one T flip-flop for all its links,
// since all of them toggle together. The flip-flop then drives every own
// channel, and toggle[0] is its enable; all toggle bits must be 1.
//
// run is the external control signal that forces the AND to 0, required by
// the paper for modules that hold all tokens at start-up; here it gates every
// module and doubles as a global hold. rst clears the T flip-flops (the
// paper's initial all-zero state); its polarity and asynchronous action are
// this design's choice.
//
// Interface: toggle[c] enables own channel c (links in order, channels of a
// link contiguous), own_q[c] is its parity, peer_q[c] the delayed parity of
// peer channel c, token[l] the token-present signal of link l, clk the local
// clock.
module gprm #(
  parameter int unsigned N_LINKS = 2,
  parameter logic [N_LINKS-1:0][7:0] OWN_CH  = {N_LINKS{8'd1}},
  parameter logic [N_LINKS-1:0][7:0] PEER_CH = {N_LINKS{8'd1}},
  parameter logic [N_LINKS-1:0] XNOR_SIDE = '0,
  parameter bit SINGLE_TFF = 1'b0,
  localparam int unsigned N_OWN  = ch_offset(OWN_CH, N_LINKS),
  localparam int unsigned N_PEER = ch_offset(PEER_CH, N_LINKS)
) (
  input  logic               rst,
  input  logic               run,
  input  logic [N_OWN-1:0]   toggle,
  output logic [N_OWN-1:0]   own_q,
  input  logic [N_PEER-1:0]  peer_q,
  output logic [N_LINKS-1:0] token,
  output logic               clk
);
  // First flattened channel index of link l (or the total, for l = N_LINKS).
  function automatic int unsigned ch_offset(input logic [N_LINKS-1:0][7:0] ch,
                                            input int unsigned l);
    int unsigned s = 0;
    for (int unsigned i = 0; i < l; i++) s += int'(ch[i]);
    return s;
  endfunction

  if (SINGLE_TFF) begin : g_single
    // Minimal form: one flip-flop drives every own channel. Only valid when
    // every link has one own channel and all of them toggle on every pulse.
    logic q;
    tff u_tff (.clk(clk), .rst(rst), .t(toggle[0]), .q(q));
    assign own_q = {N_OWN{q}};

    a_all_toggle: assert property (@(posedge clk) disable iff (rst) &toggle)
      else $error("gprm: shared flip-flop needs every link to toggle");
  end else begin : g_multi
    // Own T flip-flops, one per channel leaving this side.
    for (genvar c = 0; c < N_OWN; c++) begin : g_tff
      tff u_tff (.clk(clk), .rst(rst), .t(toggle[c]), .q(own_q[c]));
    end
  end

  // One parity gate per link: XOR or XNOR of the link's channels.
  for (genvar l = 0; l < N_LINKS; l++) begin : g_link
    localparam int unsigned OWN_LO  = ch_offset(OWN_CH, l);
    localparam int unsigned PEER_LO = ch_offset(PEER_CH, l);
    logic parity;
    always_comb begin
      parity = 1'b0;
      for (int c = 0; c < int'(OWN_CH[l]); c++)  parity ^= own_q[OWN_LO + c];
      for (int c = 0; c < int'(PEER_CH[l]); c++) parity ^= peer_q[PEER_LO + c];
    end
    assign token[l] = XNOR_SIDE[l] ? ~parity : parity;

    // At most one channel of a link toggles per clock.
    a_one_channel: assert property (@(posedge clk) disable iff (rst)
        $countones(toggle[OWN_LO +: int'(OWN_CH[l])]) <= 1)
      else $error("gprm: two channels of link %0d toggled together", l);
  end

  // The rendezvous: a clock pulse when every token is present.
  assign clk = run & (&token);

  // Every pulse must send a token away, or the clock would stay high.
  a_token_sent: assert property (@(posedge clk) disable iff (rst) |toggle)
    else $error("gprm: clock pulse without any token sent");
endmodule
