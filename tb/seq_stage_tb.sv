`timescale 1ps/1ps
// seq_stage_tb: the sequential stage with ITER = 3. A producer sends random
// words, a consumer checks 3 * x in order. Checked per word: exactly ITER
// local clock pulses, none before the word arrives; the pulses
// of a burst are one closed-loop delay apart, 1000 ps with slow = 0 and
// 2000 ps with slow = 1 (slow changes between words); the input token is
// kept during the burst and returned with the output token on the last pulse.
// A second instance with a single-channel loop (LOOP_CH = 1, ITER = 2) runs
// beside it: 2 * x, and every burst cycle 1000 ps whatever slow says.
module seq_stage_tb;
  import gals_pkg::*;
  localparam int unsigned NWORDS = 60, ITER = 3;
  localparam int unsigned FAST = 1000, SLOW = 2000;

  logic  rst = 0, run = 0, slow = 0;
  data_t in_data = '0, out_data;
  logic  in_req = 0, in_ack, out_req, out_ack = 0;
  logic  clk;
  int checks = 0, failures = 0, n_words = 0, n_clk = 0, n_slow = 0, n_fast = 0;
  realtime t_prev;
  data_t sent [$];

  seq_stage #(.ITER(ITER), .LOOP_PS({32'(SLOW), 32'(FAST)}), .STAGE_PS(250)) dut (.*);

  // Second instance: single-channel loop.
  data_t s_in = '0, s_out;
  logic  s_req = 0, s_ack, s_oreq, s_oack = 0, s_clk;
  int    s_words = 0, s_clks = 0;
  realtime s_prev;
  data_t s_sent [$];

  seq_stage #(.ITER(2), .LOOP_CH(1), .LOOP_PS({32'(SLOW), 32'(FAST)}), .STAGE_PS(250)) dut1 (
    .rst, .run, .slow, .in_data(s_in), .in_req(s_req), .in_ack(s_ack),
    .out_data(s_out), .out_req(s_oreq), .out_ack(s_oack), .clk(s_clk));

  always @(posedge s_clk) if (!rst) begin
    if (s_clks % 2 == 1)
      check($realtime - s_prev == real'(FAST), $sformatf("single-channel burst cycle %0t", $realtime - s_prev));
    s_prev = $realtime;
    s_clks++;
  end

  initial begin
    wait (run);
    for (int i = 0; i < NWORDS; i++) begin
      data_t x;
      wait (s_req == s_ack);
      x = data_t'($urandom);
      s_in = x; s_sent.push_back(x);
      #300 s_req = ~s_req;
    end
  end

  initial begin
    logic seen;
    seen = 1'b0;
    wait (run);
    while (s_words < NWORDS) begin
      data_t x;
      wait (s_oreq != seen);
      seen = s_oreq;
      #100 x = s_sent.pop_front();
      check(s_out == data_t'(2 * x), $sformatf("single-channel word %0d", s_words));
      check(s_clks == 2 * (s_words + 1), "single-channel pulses per word");
      s_words++;
      #($urandom_range(0, 3000));
      s_oack = ~s_oack;
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (!rst) begin
    if (n_clk % ITER != 0) begin
      check($realtime - t_prev == real'(slow ? SLOW : FAST),
            $sformatf("burst cycle %0t with slow=%0b", $realtime - t_prev, slow));
      if (slow) n_slow++; else n_fast++;
    end
    t_prev = $realtime;
    n_clk++;
  end

  initial begin
    #1 rst = 1; #10000 rst = 0; run = 1;
    for (int i = 0; i < NWORDS; i++) begin
      data_t x;
      wait (in_req == in_ack);
      #10 slow = (i % 4) >= 2;
      x = data_t'($urandom);
      in_data = x; sent.push_back(x);
      #300 in_req = ~in_req;
      #1 check(n_clk <= i * ITER + 1, $sformatf("word %0d: pulses before its burst", i));
      check(in_ack != in_req, "input token kept during the burst");
    end
  end

  initial begin
    logic seen;
    seen = 1'b0;
    wait (run);
    while (n_words < NWORDS) begin
      data_t x;
      wait (out_req != seen);
      seen = out_req;
      check(n_clk == (n_words + 1) * ITER, $sformatf("word %0d: %0d pulses", n_words, n_clk));
      check(in_ack == in_req, "input token returned with the result");
      #100 x = sent.pop_front();
      check(out_data == data_t'(ITER * x), $sformatf("word %0d: %0d -> %0d", n_words, x, out_data));
      n_words++;
      #($urandom_range(0, 3000));
      out_ack = ~out_ack;
    end
    wait (s_words == NWORDS);
    #2000;
    check(n_slow > 0 && n_fast > 0, "both loop delays used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(64'd10_000_000);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
