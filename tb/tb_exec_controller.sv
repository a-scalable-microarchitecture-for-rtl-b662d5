// tb_exec_controller: single mode start/stop latency; a conductor and a
// performer joined by a 3-stage link start and stop their cores on the same
// cycle when the conductor's delay is L + 1 + Dp (checked for Dp 0..11, and one cycle
// apart when it is one less); the performer ignores host
// commands.
module tb_exec_controller;
  import qc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic finish();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
  initial begin repeat (100000) @(posedge clk); failures++; $display("watchdog expired"); finish(); end
  exec_mode_e m0, m1; logic [15:0] d0, d1; logic hs0 = 0, hp0 = 0, hs1 = 0, hp1 = 0;
  link_cmd_e li0, lo0, lo1, pipe [3];
  logic cs0, cp0, cs1, cp1, r0, r1;
  exec_controller u0 (.clk, .rst_n, .mode(m0), .link_delay(d0), .host_start(hs0), .host_stop(hp0),
                      .link_in(li0), .cores_busy(1'b0), .link_out(lo0), .core_start(cs0),
                      .core_stop(cp0), .running(r0));
  exec_controller u1 (.clk, .rst_n, .mode(m1), .link_delay(d1), .host_start(hs1), .host_stop(hp1),
                      .link_in(pipe[2]), .cores_busy(1'b1), .link_out(lo1), .core_start(cs1),
                      .core_stop(cp1), .running(r1));
  always_ff @(posedge clk) begin pipe[0] <= lo0; pipe[1] <= pipe[0]; pipe[2] <= pipe[1]; end
  int t0s, t1s, t0p, t1p, cyc;
  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) begin
    if (cs0) t0s = cyc; if (cs1) t1s = cyc; if (cp0) t0p = cyc; if (cp1) t1p = cyc;
  end
  initial begin
    cyc = 0; li0 = LINK_IDLE; pipe[0] = LINK_IDLE; pipe[1] = LINK_IDLE; pipe[2] = LINK_IDLE;
    m0 = MODE_SINGLE; m1 = MODE_PERFORMER; d0 = 0; d1 = 0;
    repeat (2) @(posedge clk); @(negedge clk) rst_n = 1;
    // single mode
    hs0 = 1; @(negedge clk) hs0 = 0;
    chk(cs0 && lo0 == LINK_IDLE, "single: start one cycle later, nothing on the link");
    @(negedge clk) chk(!cs0, "start is one pulse");
    hp0 = 1; @(negedge clk) hp0 = 0; chk(cp0, "single: stop");
    // performer ignores the host
    hs1 = 1; @(negedge clk) hs1 = 0;
    repeat (5) begin chk(!cs1, "performer ignores host start"); @(negedge clk); end
    // conductor + performer, performer delay 2, link 3 stages: conductor delay 6
    m0 = MODE_CONDUCTOR; d0 = 16'd6; d1 = 16'd2; t0s = -1; t1s = -2;
    hs0 = 1; @(negedge clk) hs0 = 0;
    chk(lo0 == LINK_START, "conductor sends start on the link");
    repeat (12) @(negedge clk);
    chk(t0s > 0 && t0s == t1s, $sformatf("start cycles conductor %0d performer %0d", t0s, t1s));
    t0p = -1; t1p = -2;
    hp0 = 1; @(negedge clk) hp0 = 0;
    chk(lo0 == LINK_STOP, "conductor sends stop on the link");
    repeat (12) @(negedge clk);
    chk(t0p > 0 && t0p == t1p, $sformatf("stop cycles conductor %0d performer %0d", t0p, t1p));
    chk(r1 && !r0, "running follows cores_busy");
    // delay-matching rule over a range of performer delays Dp: with the
    // conductor at 3 + 1 + Dp both start together, link_delay + 1 cycles after
    // the command; one cycle less makes the conductor one cycle early
    for (int dp = 0; dp < 12; dp++) begin
      for (int off = 0; off < 2; off++) begin
        int tc;
        d1 = 16'(dp); d0 = 16'(3 + 1 + dp - off); t0s = -1; t1s = -2;
        @(negedge clk); hs0 = 1; tc = cyc; @(negedge clk) hs0 = 0;
        repeat (25) @(negedge clk);
        chk(t0s - tc == int'(d0) + 1, $sformatf("Dp %0d: conductor start %0d cycles after command, link_delay %0d", dp, t0s - tc, d0));
        chk(t1s - t0s == off, $sformatf("Dp %0d off %0d: performer %0d, conductor %0d", dp, off, t1s, t0s));
      end
    end
    finish();
  end
endmodule
