// tb_nco: tracks the phase accumulator in the testbench and compares the
// quadrature outputs with sin/cos of the expected table phase, for several
// tuning words and phase offsets; also checks cos(0) = full scale after clear.
module tb_nco;
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
  logic clear; logic [31:0] freq; logic [15:0] phase;
  logic signed [15:0] cos_o, sin_o;
  nco dut (.*);
  localparam real PI = 3.14159265358979;
  function automatic int ref_sin(logic [31:0] a);
    return $rtoi($sin(2.0 * PI * real'(a[31:22]) / 1024.0) * 32767.0);
  endfunction
  function automatic int ref_cos(logic [31:0] a);
    logic [9:0] i; i = a[31:22] + 10'd256;
    return $rtoi($sin(2.0 * PI * real'(i) / 1024.0) * 32767.0);
  endfunction
  logic [31:0] acc_m;
  initial begin
    clear = 0; freq = 0; phase = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      @(negedge clk);
      clear = 1;
      freq  = (t == 0) ? 32'h0040_0000 : (t == 1) ? 32'h0 : $urandom;
      phase = (t < 2) ? 16'h0 : 16'($urandom);
      @(negedge clk);
      clear = 0; acc_m = 0;
      for (int n = 0; n < 300; n++) begin
        @(negedge clk);
        chk(int'(sin_o) == ref_sin(acc_m + {phase, 16'd0}), $sformatf("t%0d n%0d sin %0d exp %0d acc %h", t, n, sin_o, ref_sin(acc_m), acc_m));
        chk(int'(cos_o) == ref_cos(acc_m + {phase, 16'd0}), "cos");
        if (t == 1 && n <= 150) chk(cos_o == 16'sd32767 && sin_o == 16'sd0, "dc at zero frequency");
        // the accumulator moved by the tuning word of the last edge
        acc_m = acc_m + freq;
        // a phase-continuous frequency change half way through
        if (n == 150) freq = freq + 32'h0010_0000;
      end
    end
    finish();
  end
endmodule
