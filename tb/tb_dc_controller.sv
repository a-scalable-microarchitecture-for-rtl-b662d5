// tb_dc_controller: square level steps (slew 0) appear 3 cycles after the pulse
// parameters; with a slew the output ramps by that step per cycle, giving a
// trapezoid whose rise time is level/slew cycles; direct envelope sampling
// gives amp*env; channel off returns to zero.
module tb_dc_controller;
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
  pulse_t pulse_i; sample_t env_s, i_o, q_o; logic [15:0] slew;
  dc_controller dut (.*);
  initial begin
    pulse_i = '0; env_s = 0; slew = 0;
    repeat (2) @(posedge clk); @(negedge clk) rst_n = 1;
    // square step
    pulse_i.active = 1; pulse_i.amp = 16'sd12000; pulse_i.env = 0;
    @(negedge clk); chk(i_o == 0, "no output after 1 cycle");
    @(negedge clk); chk(i_o == 0, "no output after 2 cycles");
    @(negedge clk); chk(i_o == 16'sd12000, "level after 3 cycles");
    chk(q_o == 0, "q zero");
    pulse_i.active = 0;
    repeat (3) @(negedge clk); chk(i_o == 0, "back to zero");
    // trapezoid: rise of 12000/1000 = 12 cycles
    slew = 16'd1000; pulse_i.active = 1; pulse_i.amp = 16'sd12000;
    repeat (2) @(negedge clk);
    for (int k = 1; k <= 14; k++) begin
      @(negedge clk);
      chk(int'(i_o) == ((k * 1000 > 12000) ? 12000 : k * 1000), $sformatf("ramp up %0d: %0d", k, i_o));
    end
    pulse_i.active = 0;
    repeat (2) @(negedge clk);
    for (int k = 1; k <= 13; k++) begin
      @(negedge clk);
      chk(int'(i_o) == ((12000 - k * 1000 < 0) ? 0 : 12000 - k * 1000), $sformatf("ramp down %0d: %0d", k, i_o));
    end
    // negative level and direct sampling
    slew = 0; pulse_i.active = 1; pulse_i.env = 4'd2; pulse_i.amp = -16'sd16384;
    for (int n = 0; n < 40; n++) begin
      @(negedge clk);
      env_s = 16'(n * 800);
      if (n >= 3) chk(int'(i_o) == ((-16384 * (n - 2) * 800) >>> 15), $sformatf("sampled %0d: %0d", n, i_o));
    end
    finish();
  end
endmodule
