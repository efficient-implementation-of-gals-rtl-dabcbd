`timescale 1ps/1ps
// deep_fifo_tb: a deep FIFO pipeline of DEPTH plain pipeline stages, the
// other pipeline kind the GALS scheme was evaluated on (and the shape of its
// temperature test). Every link, the two end links included, has forward
// delay FWD and backward delay BWD; producer and consumer answer at once.
//
// Timing worked out by hand: an empty stage fires the instant a word arrives,
// so the first word takes (DEPTH + 1) * FWD from producer to consumer. In
// steady state a stage fires again once its output token has come back
// (FWD + BWD after it fired: the next stage fires on arrival and returns the
// token at once) and its next word has come in (also BWD + FWD), so words
// leave every FWD + BWD = 1500 ps, about 667 million words per second with
// these delays. The test checks both numbers exactly, and every word (x +
// DEPTH).
module deep_fifo_tb;
  import gals_pkg::*;
  localparam int unsigned DEPTH = 32, FWD = 1000, BWD = 500, NWORDS = 300;

  logic  rst = 0, run = 0;
  data_t d [DEPTH+1];
  logic  req_q [DEPTH+1], req_d [DEPTH+1], ack_q [DEPTH+1], ack_d [DEPTH+1];
  int checks = 0, failures = 0, n_words = 0;
  realtime t_first_sent, t_prev;
  data_t sent [$];

  for (genvar k = 0; k <= DEPTH; k++) begin : g_link
    comm_link #(.N_FWD(1), .N_BWD(1), .FWD_PS(32'(FWD)), .BWD_PS(32'(BWD)),
                .STAGE_PS(250)) u_link (
      .fwd_q(req_q[k]), .fwd_dly(req_d[k]),
      .bwd_q(ack_q[k]), .bwd_dly(ack_d[k]));
  end
  for (genvar k = 0; k < DEPTH; k++) begin : g_stage
    logic clk;
    pipe_stage #(.OUT_CH(1), .ADD(data_t'(1))) u_stage (
      .rst, .run,
      .in_data(d[k]), .in_req(req_d[k]), .in_ack(ack_q[k]),
      .out_data(d[k+1]), .out_req(req_q[k+1]), .out_ack(ack_d[k+1]),
      .clk);
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Producer: owns req_q[0]; its token is home when ack_d[0] == req_q[0].
  initial begin
    req_q[0] = 1'b0; d[0] = '0;
    #1 rst = 1; #10000 rst = 0; run = 1;
    #1000;
    for (int i = 0; i < NWORDS; i++) begin
      data_t x;
      wait (ack_d[0] == req_q[0]);
      x = data_t'($urandom);
      d[0] = x; sent.push_back(x);
      if (i == 0) t_first_sent = $realtime;
      req_q[0] = ~req_q[0];
    end
  end

  // Consumer: owns ack_q[DEPTH]; a word is here when req_d[DEPTH] != ack_q[DEPTH].
  initial begin
    ack_q[DEPTH] = 1'b0;
    wait (run);
    while (n_words < NWORDS) begin
      data_t x;
      wait (req_d[DEPTH] != ack_q[DEPTH]);
      x = sent.pop_front();
      check(d[DEPTH] == data_t'(x + DEPTH), $sformatf("word %0d", n_words));
      if (n_words == 0)
        check($realtime - t_first_sent == real'((DEPTH + 1) * FWD),
              $sformatf("first-word latency %0t", $realtime - t_first_sent));
      else if (n_words > 2 * DEPTH)
        check($realtime - t_prev == real'(FWD + BWD),
              $sformatf("word %0d interval %0t", n_words, $realtime - t_prev));
      t_prev = $realtime;
      n_words++;
      ack_q[DEPTH] = ~ack_q[DEPTH];
    end
    $display("deep FIFO: %0d stages, steady interval %0t", DEPTH, FWD + BWD);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(64'd20_000_000);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
