`timescale 1ps/1ps
// gprm_tb: checks the rendezvous module in its sequential-machine shape
// (input link XOR side, output link XNOR side, two-channel closed loop XNOR
// side). The peer parities and the toggle enables are driven at random; a
// model of the parity gates and flip-flops predicts the token signals, the
// flip-flop states and the number of local clock pulses, and the test checks
// that a pulse happens exactly when all tokens are present and run is high.
// A second instance in the join shape checks the minimal form with one shared
// flip-flop (SINGLE_TFF) the same way.
module gprm_tb;
  logic       rst = 0, run = 0;
  logic [3:0] toggle = 4'b0001, own_q;
  logic [3:0] peer_q = '0;
  logic [2:0] token;
  logic       clk;
  int checks = 0, failures = 0, pulses = 0, exp_pulses = 0;
  logic [3:0] m_q;

  gprm #(
    .N_LINKS(3), .OWN_CH({8'd2, 8'd1, 8'd1}), .PEER_CH({8'd2, 8'd1, 8'd1}),
    .XNOR_SIDE(3'b110)
  ) dut (.*);

  // Second instance: join shape (two inputs, one output) with one shared
  // flip-flop, the minimal form.
  logic [2:0] s_q, s_peer = '0, s_token;
  logic       s_clk, s_m;
  int         s_pulses = 0, s_exp = 0;
  gprm #(
    .N_LINKS(3), .XNOR_SIDE(3'b100), .SINGLE_TFF(1'b1)
  ) dut_single (.rst, .run, .toggle(3'b111), .own_q(s_q), .peer_q(s_peer),
                .token(s_token), .clk(s_clk));
  always @(posedge s_clk) if (!rst) s_pulses++;

  always @(posedge clk) if (!rst) pulses++;

  function automatic logic [2:0] tokens_of(input logic [3:0] q, input logic [3:0] p);
    return {~(q[3] ^ q[2] ^ p[3] ^ p[2]), ~(q[1] ^ p[1]), q[0] ^ p[0]};
  endfunction

  function automatic logic [2:0] s_token_of(input logic q, input logic [2:0] p);
    return {~(q ^ p[2]), q ^ p[1], q ^ p[0]};
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #1 rst = 1;
    #10 rst = 0;
    m_q = '0;
    s_m = 1'b0;
    #10 check(token == 3'b110, "initial tokens: output and loop here, input away");
    check(clk == 1'b0, "no clock without the input token");
    for (int i = 0; i < 400; i++) begin
      logic [3:0] tg;
      // At most one channel per link, at least one token sent.
      tg = {2'b00, 2'($urandom)};
      case ($urandom_range(0, 2))
        0: tg[3:2] = 2'b00;
        1: tg[3:2] = 2'b01;
        2: tg[3:2] = 2'b10;
      endcase
      if (tg == '0) tg = 4'b0001;
      run = 1'b0;
      #1 toggle = tg;
      peer_q = 4'($urandom);
      #4 run = ($urandom_range(0, 7) != 0);
      if (run && &tokens_of(m_q, peer_q)) begin
        m_q ^= tg;
        exp_pulses++;
      end
      s_peer = 3'($urandom);
      if (run && s_token_of(s_m, s_peer) == 3'b111) begin
        s_m = ~s_m;
        s_exp++;
      end
      #5;
      check(s_q == {3{s_m}}, $sformatf("step %0d: shared flip-flop", i));
      check(s_token == s_token_of(s_m, s_peer), $sformatf("step %0d: shared tokens", i));
      check(s_pulses == s_exp, $sformatf("step %0d: shared pulses", i));
      check(own_q == m_q, $sformatf("step %0d: flip-flops %b, expected %b", i, own_q, m_q));
      check(token == tokens_of(m_q, peer_q), $sformatf("step %0d: tokens", i));
      check(clk == (run & (&tokens_of(m_q, peer_q))), $sformatf("step %0d: clk", i));
      check(pulses == exp_pulses, $sformatf("step %0d: %0d pulses, expected %0d", i, pulses, exp_pulses));
    end
    check(exp_pulses > 20, "enough pulses exercised");
    check(s_exp > 20, "enough shared-form pulses exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
