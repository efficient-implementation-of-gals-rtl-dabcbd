`timescale 1ps/1ps
// fcl_lfsr: pseudo-random channel selector for spread-spectrum flow control.
//
// Flow control logic that tells a rendezvous module which of two channels
// (two different delays) the next token on a link is to take. Choosing the
// channel by a pseudo-random pattern spreads the timing of data transfers,
// and with it the spectrum of the emitted interference; the paper uses this
// on one link of a pipeline. The pattern generator is this design's choice:
// an 8-bit Fibonacci LFSR with the maximal-length polynomial
// x^8 + x^6 + x^5 + x^4 + 1 (period 255), reset to SEED.
//
// Interface: clk is the local clock of the owning block; the LFSR advances
// on every local clock edge. sel is the current pseudo-random bit (0: first
// channel, 1: second channel); it is read by the flow control logic before
// the edge, as the paper's flow control logic is.
module fcl_lfsr #(
  parameter logic [7:0] SEED = 8'hA5
) (
  input  logic clk,
  input  logic rst,
  output logic sel
);
  logic [7:0] lfsr;

  always_ff @(posedge clk or posedge rst) begin
    if (rst) lfsr <= SEED;
    else     lfsr <= {lfsr[6:0], lfsr[7] ^ lfsr[5] ^ lfsr[4] ^ lfsr[3]};
  end

  assign sel = lfsr[7];
endmodule
