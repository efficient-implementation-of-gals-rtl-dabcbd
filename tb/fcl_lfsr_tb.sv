`timescale 1ps/1ps
// fcl_lfsr_tb: compares the channel-select bit with an independent model of
// the LFSR (x^8 + x^6 + x^5 + x^4 + 1, written as a Galois-free bit loop
// here), and checks that the sequence repeats after 255 steps and uses both
// channels about equally (128 ones and 127 zeros per period).
module fcl_lfsr_tb;
  logic clk = 0, rst = 0, sel;
  int checks = 0, failures = 0;
  logic [7:0] m;
  int ones = 0;
  logic first [255];

  fcl_lfsr #(.SEED(8'hA5)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #1 rst = 1;
    #10 rst = 0;
    m = 8'hA5;
    for (int i = 0; i < 510; i++) begin
      logic fb;
      check(sel == m[7], $sformatf("step %0d", i));
      if (i < 255) begin first[i] = sel; ones += int'(sel); end
      else check(sel == first[i - 255], $sformatf("period at step %0d", i));
      fb = 1'b0;
      foreach (m[b]) if (b == 7 || b == 5 || b == 4 || b == 3) fb ^= m[b];
      m = {m[6:0], fb};
      #5 clk = 1; #5 clk = 0;
    end
    check(ones == 128, $sformatf("%0d ones per period", ones));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
