// tb_gain_control: random samples and gains against x*g/2^14 with saturation.
module tb_gain_control;
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
  initial begin repeat (20000) @(posedge clk); failures++; $display("watchdog expired"); finish(); end
  coef_t gain; sample_t i_i, q_i, i_o, q_o;
  gain_control dut (.*);
  function automatic int ref_f(int x, int g);
    int v = (x * g) >>> 14;
    return v > 32767 ? 32767 : (v < -32768 ? -32768 : v);
  endfunction
  initial begin
    gain = 0; i_i = 0; q_i = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      gain = (n < 10) ? 16'sd16384 : 16'($urandom);
      i_i = 16'($urandom); q_i = 16'($urandom);
      @(negedge clk);
      chk(int'(i_o) == ref_f(int'(i_i), int'(gain)), $sformatf("I %0d*%0d -> %0d", i_i, gain, i_o));
      chk(int'(q_o) == ref_f(int'(q_i), int'(gain)), "Q");
    end
    finish();
  end
endmodule
