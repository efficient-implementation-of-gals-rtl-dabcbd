`timescale 1ps/1ps
// pipe_stage_tb: two pipeline stages in a row, as in the paper's two-stage
// example: a plain stage (ADD = 1) and a spread-spectrum stage with a
// two-channel output link (ADD = 5). The link between them is modelled here
// by plain delays. A producer sends random words, a consumer with random
// pauses checks x + 6 in order. Also checked: an empty stage clocks in the
// same instant its input token arrives (in_ack answers in_req with no
// delay); the spread stage sends exactly one toggle per word and uses both
// channels; nothing moves while run is low.
module pipe_stage_tb;
  import gals_pkg::*;
  localparam int unsigned NWORDS = 100;

  logic  rst = 0, run = 0;
  data_t in_data = '0, mid_data, out_data;
  logic  in_req = 0, in_ack, mid_req, mid_req_d, mid_ack, mid_ack_d;
  logic [1:0] out_req;
  logic  out_ack = 0;
  logic  clk_a, clk_b;
  int checks = 0, failures = 0, n_words = 0, n_ch0 = 0, n_ch1 = 0, n_imm = 0;
  bit armed = 0;
  data_t sent [$];

  pipe_stage #(.OUT_CH(1), .ADD(data_t'(1))) u_a (
    .rst, .run, .in_data, .in_req, .in_ack,
    .out_data(mid_data), .out_req(mid_req), .out_ack(mid_ack_d), .clk(clk_a));
  assign #700 mid_req_d = mid_req;
  assign #400 mid_ack_d = mid_ack;
  pipe_stage #(.OUT_CH(2), .ADD(data_t'(5))) u_b (
    .rst, .run, .in_data(mid_data), .in_req(mid_req_d), .in_ack(mid_ack),
    .out_data, .out_req, .out_ack, .clk(clk_b));

  always @(out_req[0]) if (armed) n_ch0++;
  always @(out_req[1]) if (armed) n_ch1++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #1 rst = 1; #10000 rst = 0; armed = 1;
    #10 check(in_ack == 1'b0 && out_req == 2'b00, "idle after reset");
    in_req = 1; #2000;
    check(in_ack == 1'b0, "no pulse while run is low");
    in_req = 0; run = 1;
    for (int i = 0; i < NWORDS; i++) begin
      data_t x;
      wait (in_req == in_ack);
      x = data_t'($urandom);
      in_data = x; sent.push_back(x);
      #300 in_req = ~in_req;
      #1;
      if (in_ack == in_req) n_imm++;
    end
  end

  initial begin
    logic tok_seen;
    tok_seen = 1'b0;
    wait (run);
    while (n_words < NWORDS) begin
      data_t x;
      wait ((^out_req) != tok_seen);
      tok_seen = ^out_req;
      #100 x = sent.pop_front();
      check(out_data == data_t'(x + 6), $sformatf("word %0d: %0d -> %0d", n_words, x, out_data));
      n_words++;
      #($urandom_range(0, 1) ? $urandom_range(0, 500) : $urandom_range(3000, 9000));
      out_ack = ~out_ack;
    end
    #5000;
    check(n_ch0 + n_ch1 == int'(NWORDS), $sformatf("%0d toggles on the spread link", n_ch0 + n_ch1));
    check(n_ch0 > 0 && n_ch1 > 0, "both spread channels used");
    check(n_imm > 0, "empty stage takes a word at once");
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
