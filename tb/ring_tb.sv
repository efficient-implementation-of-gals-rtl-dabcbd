`timescale 1ps/1ps
// ring_tb: a ring pipeline of N pipeline stages closed on itself, one of the
// two pipeline kinds the GALS scheme was evaluated on.
//
// The link from the last stage into stage 0 starts full (stage 0 has
// IN_TOKEN = 1, the last stage OUT_TOKEN = 0), so stage 0 holds all its
// tokens at reset and fires as soon as run rises: the start-up case the
// external force-to-zero signal exists for. One word then circulates, each
// stage adding 1. Checked: no pulse anywhere while run is low; stage 0's
// first pulse comes at the instant run rises; on its m-th pulse stage 0
// loads (m-1)*N + 1 (mod 256); every lap takes exactly N forward delays,
// since each stage finds its output token home and fires on arrival.
module ring_tb;
  import gals_pkg::*;
  localparam int unsigned N = 8, FWD = 1000, BWD = 500, LAPS = 40;

  logic  rst = 0, run = 0;
  data_t d [N];
  logic  req_q [N], req_d [N], ack_q [N], ack_d [N];
  logic  clk [N];
  int checks = 0, failures = 0, n_s0 = 0, n_early = 0;
  realtime t_run, t_last;

  // Stage k takes link k (from stage k-1) and drives link k+1 mod N.
  for (genvar k = 0; k < N; k++) begin : g_ring
    localparam int unsigned NX = (k + 1) % N;
    pipe_stage #(.OUT_CH(1), .ADD(data_t'(1)),
                 .IN_TOKEN(k == 0), .OUT_TOKEN(k != N - 1)) u_stage (
      .rst, .run,
      .in_data(d[k]), .in_req(req_d[k]), .in_ack(ack_q[k]),
      .out_data(d[NX]), .out_req(req_q[NX]), .out_ack(ack_d[NX]),
      .clk(clk[k]));
    comm_link #(.N_FWD(1), .N_BWD(1), .FWD_PS(32'(FWD)), .BWD_PS(32'(BWD)),
                .STAGE_PS(250)) u_link (
      .fwd_q(req_q[NX]), .fwd_dly(req_d[NX]),
      .bwd_q(ack_q[NX]), .bwd_dly(ack_d[NX]));
    always @(posedge clk[k]) if (!rst && !run) n_early++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk[0]) if (!rst && run) begin
    n_s0++;
    if (n_s0 == 1) check($realtime == t_run, "stage 0 fires when run rises");
    else check($realtime - t_last == real'(N * FWD),
               $sformatf("lap %0d took %0t", n_s0 - 1, $realtime - t_last));
    t_last = $realtime;
    #1 check(d[1] == data_t'((n_s0 - 1) * N + 1),
             $sformatf("pulse %0d of stage 0 loaded %0d", n_s0, d[1]));
  end

  initial begin
    #1 rst = 1; #10000 rst = 0;
    #20000 check(n_early == 0, $sformatf("%0d pulses while run was low", n_early));
    t_run = $realtime; run = 1;
    wait (n_s0 == LAPS + 1);
    #10;
    $display("ring: %0d laps of %0d stages", LAPS, N);
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
