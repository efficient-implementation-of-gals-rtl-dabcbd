`timescale 1ps/1ps
// gals_pipeline_tb: end-to-end test of the GALS pipeline at its default size.
//
// A producer and a consumer sit at the two ends and speak the link protocol
// of the pipeline: the producer puts a word on in_data, waits a bundling
// delay and toggles in_req; the token comes back when in_ack toggles. The
// consumer waits for out_req to toggle, checks out_data against
// ITER*(x+DEPTH+1) + (x+DEPTH+2) mod 256 computed here, then toggles out_ack
// after a random pause (sometimes long, to back the pipeline up).
//
// Besides the data it checks, and counts, each mechanism of the design:
//   * words arrive in order and each is right;
//   * back-pressure: the join held its inputs while its output token was away;
//   * spread spectrum: both forward channels of the two-channel link used;
//   * clock bursts: the sequential stage ran ITER pulses per word, with the
//     ITER-1 inner cycles exactly one closed-loop delay apart;
//   * cycle length selection: bursts run at both loop delays (slow = 0, 1);
//   * hold: with run low no block produces a clock pulse.
// A watchdog ends the run with a failure if the pipeline deadlocks.
module gals_pipeline_tb;
  import gals_pkg::*;

  localparam int unsigned DEPTH = 4;
  localparam int unsigned ITER  = 4;
  localparam int unsigned NWORDS = 200;
  localparam int unsigned LOOP_FAST = 1000, LOOP_SLOW = 2000;

  logic  rst, run, slow;
  data_t in_data, out_data;
  logic  in_req, in_ack, out_req, out_ack;

  gals_pipeline dut (.*);

  int checks = 0, failures = 0;
  int n_words = 0, n_backpressure = 0, n_bursts_fast = 0, n_bursts_slow = 0;
  int n_ch0 = 0, n_ch1 = 0, n_loop = 0, n_seq_clk = 0, n_hold_pulses = 0;
  int n_producer_waits = 0;
  bit holding = 0;
  bit armed = 0;                    // set once reset is over

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic data_t expect_of(input data_t x);
    return data_t'(ITER * (x + DEPTH + 1) + (x + DEPTH + 2));
  endfunction

  // Observation of inner mechanisms.
  always @(dut.u_spread.out_req[0]) if (armed) n_ch0++;
  always @(dut.u_spread.out_req[1]) if (armed) n_ch1++;
  always @(dut.u_seq.own_q[3] or dut.u_seq.own_q[2]) if (armed) n_loop++;
  always @(posedge dut.u_join.u_gprm.token[0] or posedge dut.u_join.u_gprm.token[1])
    if (armed && dut.u_join.u_gprm.token == 3'b011) n_backpressure++;
  always @(posedge dut.u_join.clk or posedge dut.u_fork.clk or posedge dut.u_seq.clk
           or posedge dut.u_spread.clk or posedge dut.g_stage[0].clk)
    if (holding) n_hold_pulses++;

  // Burst timing: inner pulses of the sequential stage one loop delay apart.
  realtime t_last;
  logic    slow_last;               // slow as the previous pulse saw it
  int      pulse_in_word = 0;
  bit      run_dropped = 0;         // a hold fell inside this burst cycle
  always @(negedge run) if (armed) run_dropped = 1;
  always @(posedge dut.u_seq.clk) begin
    if (armed) begin
      n_seq_clk++;
      if (pulse_in_word > 0 && !run_dropped) begin
        check($realtime - t_last == real'(slow_last ? LOOP_SLOW : LOOP_FAST),
              $sformatf("burst cycle %0t, slow=%0b", $realtime - t_last, slow_last));
      end
      t_last = $realtime;
      slow_last = slow;
      run_dropped = 0;
      pulse_in_word = (pulse_in_word + 1) % ITER;
      if (pulse_in_word == 0) begin
        if (slow) n_bursts_slow++; else n_bursts_fast++;
      end
    end
  end

  // Producer.
  data_t sent [$];
  initial begin
    rst = 0; run = 0; slow = 0; in_req = 0; in_data = '0; out_ack = 0;
    #1 rst = 1;
    #10000 rst = 0;
    armed = 1;
    #1000 run = 1;
    for (int i = 0; i < NWORDS; i++) begin
      data_t x;
      x = data_t'($urandom);
      if (i == NWORDS / 2) slow = 1;
      if (in_req != in_ack) n_producer_waits++;
      wait (in_req == in_ack);          // token back at the producer (XNOR side)
      in_data = x;
      sent.push_back(x);
      #300 in_req = ~in_req;            // bundled data: word first, then token
      if (i == NWORDS / 4) begin        // hold every block for a while
        #5000;
        run = 0;
        #50 holding = 1;
        #20000 holding = 0;
        run = 1;
      end
    end
  end

  // Consumer.
  initial begin
    data_t x;
    logic seen;
    seen = 1'b0;
    wait (armed);
    while (n_words < NWORDS) begin
      wait (out_req != seen);           // token here: out_req ^ out_ack_seen
      seen = out_req;
      #200;
      x = sent.pop_front();
      check(out_data == expect_of(x),
            $sformatf("word %0d: in %0d out %0d expected %0d", n_words, x, out_data, expect_of(x)));
      n_words++;
      if ($urandom_range(0, 3) == 0) #($urandom_range(10000, 30000));
      else                           #($urandom_range(0, 2000));
      out_ack = ~out_ack;
    end
    #20000;
    check(n_ch0 > 0 && n_ch1 > 0, $sformatf("spread channels used: %0d / %0d", n_ch0, n_ch1));
    check(n_ch0 + n_ch1 == int'(NWORDS), "one spread-link toggle per word");
    check(n_loop == int'(NWORDS * (ITER - 1)), $sformatf("loop tokens %0d", n_loop));
    check(n_seq_clk == int'(NWORDS * ITER), $sformatf("sequential pulses %0d", n_seq_clk));
    check(n_bursts_fast > 0, "bursts at the short loop delay");
    check(n_bursts_slow > 0, "bursts at the long loop delay");
    check(n_backpressure > 0, "back-pressure at the join");
    check(n_producer_waits > 0, "producer waited for the input token");
    check(n_hold_pulses == 0, $sformatf("%0d pulses while run was low", n_hold_pulses));
    $display("mechanisms: words=%0d backpressure=%0d producer_waits=%0d spread_ch0=%0d spread_ch1=%0d loop_tokens=%0d bursts_fast=%0d bursts_slow=%0d hold_pulses=%0d",
             n_words, n_backpressure, n_producer_waits, n_ch0, n_ch1, n_loop,
             n_bursts_fast, n_bursts_slow, n_hold_pulses);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Watchdog.
  initial begin
    #(64'd50_000_000);
    failures++;
    $display("FAIL: watchdog, %0d words received", n_words);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
