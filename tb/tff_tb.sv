`timescale 1ps/1ps
// tff_tb: checks the T flip-flop against a reference model: asynchronous
// reset to 0, toggle on a rising edge with t = 1, hold with t = 0.
module tff_tb;
  logic clk = 0, rst = 0, t = 0, q;
  int checks = 0, failures = 0;
  logic model;

  tff dut (.*);

  initial begin
    #1 rst = 1;
    #10 check(q == 1'b0, "reset value");
    rst = 0; model = 0;
    for (int i = 0; i < 200; i++) begin
      t = 1'($urandom);
      #5 clk = 1;
      if (t) model = ~model;
      #5 check(q == model, $sformatf("cycle %0d t=%0b", i, t));
      clk = 0;
      if (i == 100) begin            // asynchronous reset mid-run
        #2 rst = 1; #1 check(q == 1'b0, "async reset"); rst = 0; model = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #1_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
