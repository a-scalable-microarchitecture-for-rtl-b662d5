// tb_meas_register: random writes from two ports against a reference register,
// same-cycle writes and clear.
module tb_meas_register;
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
  logic clear = 0; logic [1:0] wr_valid; logic [4:0] wr_bit [2]; logic [1:0] wr_val;
  logic [31:0] meas, ref_r;
  meas_register dut (.*);
  initial begin
    wr_valid = 0; wr_val = 0; wr_bit[0] = 0; wr_bit[1] = 0; ref_r = 0;
    repeat (2) @(posedge clk); @(negedge clk) rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      wr_valid = 2'($urandom); wr_val = 2'($urandom);
      wr_bit[0] = 5'($urandom); wr_bit[1] = 5'($urandom);
      clear = (n % 97) == 96;
      if (clear) ref_r = 0;
      else for (int w = 0; w < 2; w++) if (wr_valid[w]) ref_r[wr_bit[w]] = wr_val[w];
      @(negedge clk);
      chk(meas == ref_r, $sformatf("n%0d meas %h exp %h", n, meas, ref_r));
    end
    finish();
  end
endmodule
