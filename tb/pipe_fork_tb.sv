`timescale 1ps/1ps
// pipe_fork_tb: a producer feeds the fork, two consumers with independent
// random pauses take its outputs. Each consumer must get every word, in
// order; the fork must not take a new word until both consumers have taken
// the previous one (checked by counting words in flight).
module pipe_fork_tb;
  import gals_pkg::*;
  localparam int unsigned NWORDS = 100;

  logic  rst = 0, run = 0;
  data_t in_data = '0, out_data;
  logic  in_req = 0, in_ack;
  logic [1:0] out_req, out_ack = '0;
  logic  clk;
  int checks = 0, failures = 0, n_in = 0;
  int n_out [2] = '{0, 0};
  data_t sent [$];

  pipe_fork dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (!rst) begin
    n_in++;
    check(n_in - n_out[0] <= 1 && n_in - n_out[1] <= 1,
          $sformatf("fork took word %0d before both outputs were free", n_in));
  end

  initial begin
    #1 rst = 1; #10000 rst = 0; run = 1;
    for (int i = 0; i < NWORDS; i++) begin
      data_t x;
      wait (in_req == in_ack);
      x = data_t'($urandom);
      in_data = x; sent.push_back(x);
      #300 in_req = ~in_req;
    end
  end

  for (genvar k = 0; k < 2; k++) begin : g_cons
    initial begin
      logic seen;
      seen = 1'b0;
      wait (run);
      while (n_out[k] < int'(NWORDS)) begin
        wait (out_req[k] != seen);
        seen = out_req[k];
        #100 check(out_data == sent[n_out[k]], $sformatf("out %0d word %0d", k, n_out[k]));
        n_out[k]++;
        #($urandom_range(0, 6000));
        out_ack[k] = ~out_ack[k];
      end
    end
  end

  initial begin
    wait (n_out[0] == int'(NWORDS) && n_out[1] == int'(NWORDS));
    #2000;
    check(n_in == int'(NWORDS), $sformatf("%0d words taken", n_in));
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
