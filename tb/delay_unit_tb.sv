`timescale 1ps/1ps
// delay_unit_tb: checks that every parity change on din reaches dout exactly
// STAGES * STAGE_PS later, including two changes closer together than the
// whole delay but further apart than one stage: both must come out.
module delay_unit_tb;
  localparam int unsigned STAGES = 4, STAGE_PS = 250, D = STAGES * STAGE_PS;
  logic din = 0, dout;
  int checks = 0, failures = 0;

  delay_unit #(.STAGES(STAGES), .STAGE_PS(STAGE_PS)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #5000;
    for (int i = 0; i < 50; i++) begin
      logic v;
      v = ~din;
      din = v;
      #(D - 10) check(dout == ~v, "dout changed before the delay");
      #20       check(dout == v,  "dout not changed after the delay");
      #($urandom_range(100, 2000));
    end
    // Two changes 400 ps apart, both inside one delay.
    din = ~din; #400 din = ~din;
    #(D - 400 + 200) check(dout == ~din, "first of two close changes lost");
    #400             check(dout == din,  "second of two close changes lost");
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
