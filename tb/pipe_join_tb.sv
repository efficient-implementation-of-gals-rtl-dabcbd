`timescale 1ps/1ps
// pipe_join_tb: two producers with independent random pauses feed the join,
// one consumer checks a + b for every pair, in order. The join must wait for
// both inputs: it may never clock with only one new word.
module pipe_join_tb;
  import gals_pkg::*;
  localparam int unsigned NWORDS = 100;

  logic  rst = 0, run = 0;
  data_t in_data [2], out_data;
  logic [1:0] in_req = '0, in_ack;
  logic  out_req, out_ack = 0;
  logic  clk;
  int checks = 0, failures = 0, n_words = 0, n_clk = 0;
  int n_sent [2] = '{0, 0};
  data_t sent [2][$];

  pipe_join dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (!rst) begin
    n_clk++;
    check(n_sent[0] >= n_clk && n_sent[1] >= n_clk, "join clocked without both words");
  end

  initial begin
    in_data[0] = '0; in_data[1] = '0;
    #1 rst = 1; #10000 rst = 0; run = 1;
  end

  for (genvar k = 0; k < 2; k++) begin : g_prod
    initial begin
      wait (run);
      for (int i = 0; i < NWORDS; i++) begin
        data_t x;
        wait (in_req[k] == in_ack[k]);
        #($urandom_range(0, 5000));
        x = data_t'($urandom);
        in_data[k] = x; sent[k].push_back(x);
        #300 in_req[k] = ~in_req[k];
        n_sent[k]++;
      end
    end
  end

  initial begin
    logic seen;
    seen = 1'b0;
    wait (run);
    while (n_words < NWORDS) begin
      data_t a, b;
      wait (out_req != seen);
      seen = out_req;
      #100 a = sent[0].pop_front(); b = sent[1].pop_front();
      check(out_data == data_t'(a + b), $sformatf("word %0d: %0d + %0d -> %0d", n_words, a, b, out_data));
      n_words++;
      #($urandom_range(0, 3000));
      out_ack = ~out_ack;
    end
    #2000;
    check(n_clk == int'(NWORDS), $sformatf("%0d join pulses", n_clk));
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
