// tb_dc_correction: random samples and offsets against a saturating add.
module tb_dc_correction;
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
  sample_t off_i, off_q, i_i, q_i, i_o, q_o;
  dc_correction dut (.*);
  function automatic int sat(int v);
    return v > 32767 ? 32767 : (v < -32768 ? -32768 : v);
  endfunction
  initial begin
    {off_i, off_q, i_i, q_i} = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      off_i = 16'($urandom); off_q = 16'($urandom); i_i = 16'($urandom); q_i = 16'($urandom);
      @(negedge clk);
      chk(int'(i_o) == sat(int'(i_i) + int'(off_i)), "I");
      chk(int'(q_o) == sat(int'(q_i) + int'(off_q)), "Q");
    end
    finish();
  end
endmodule
