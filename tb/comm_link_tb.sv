`timescale 1ps/1ps
// comm_link_tb: toggles each channel of a link with two forward channels and
// one backward channel, each of a different delay, and checks that only that
// channel's output changes, and exactly its delay later.
module comm_link_tb;
  localparam logic [1:0][31:0] FWD = {32'd1500, 32'd1000};
  localparam logic [0:0][31:0] BWD = {32'd500};
  logic [1:0] fwd_q = '0, fwd_dly;
  logic [0:0] bwd_q = '0, bwd_dly;
  int checks = 0, failures = 0;

  comm_link #(.N_FWD(2), .N_BWD(1), .FWD_PS(FWD), .BWD_PS(BWD), .STAGE_PS(250)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #5000;
    for (int i = 0; i < 30; i++) begin
      int unsigned c, d;
      logic [2:0] prev, after;
      c = $urandom_range(0, 2);
      d = (c == 2) ? BWD[0] : FWD[c];
      prev = {bwd_dly, fwd_dly};
      if (c == 2) bwd_q[0] = ~bwd_q[0]; else fwd_q[c] = ~fwd_q[c];
      #(d - 10) check({bwd_dly, fwd_dly} == prev, $sformatf("channel %0d early", c));
      after = prev; after[c] = ~after[c];
      #20       check({bwd_dly, fwd_dly} == after, $sformatf("channel %0d late or wrong", c));
      #2000;
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
