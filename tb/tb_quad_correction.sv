// tb_quad_correction: random I/Q and matrices against the 2x2 product, plus the
// identity matrix passing samples unchanged.
module tb_quad_correction;
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
  coef_t a11, a12, a21, a22; sample_t i_i, q_i, i_o, q_o;
  quad_correction dut (.*);
  function automatic int sat(longint v);
    return v > 32767 ? 32767 : (v < -32768 ? -32768 : int'(v));
  endfunction
  initial begin
    {a11, a12, a21, a22, i_i, q_i} = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      if (n < 20) begin a11 = 16384; a22 = 16384; a12 = 0; a21 = 0; end
      else begin a11 = 16'($urandom); a12 = 16'($urandom); a21 = 16'($urandom); a22 = 16'($urandom); end
      i_i = 16'($urandom); q_i = 16'($urandom);
      @(negedge clk);
      chk(int'(i_o) == sat((longint'(i_i) * a11 + longint'(q_i) * a12) >>> 14), "I");
      chk(int'(q_o) == sat((longint'(i_i) * a21 + longint'(q_i) * a22) >>> 14), "Q");
      if (n < 20) chk(i_o == i_i && q_o == q_i, "identity");
    end
    finish();
  end
endmodule
