`timescale 1ps/1ps
// loop_link_tb: toggles each channel of a two-channel closed-loop link and
// checks that its parity returns exactly that channel's delay later, and
// that the other channel does not move.
module loop_link_tb;
  localparam logic [1:0][31:0] DLY = {32'd2000, 32'd1000};
  logic [1:0] q = '0, q_dly;
  int checks = 0, failures = 0;

  loop_link #(.N_CH(2), .DELAY_PS(DLY), .STAGE_PS(250)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #5000;
    for (int i = 0; i < 30; i++) begin
      int unsigned c;
      logic [1:0] prev;
      c = $urandom_range(0, 1);
      prev = q_dly;
      q[c] = ~q[c];
      #(DLY[c] - 10) check(q_dly == prev, $sformatf("channel %0d early", c));
      #20            check(q_dly == q, $sformatf("channel %0d late or wrong", c));
      #3000;
    end
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
