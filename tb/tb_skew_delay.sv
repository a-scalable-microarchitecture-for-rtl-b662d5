// tb_skew_delay: a random sample stream through every delay setting; the output
// must equal the input delay+1 cycles earlier.
module tb_skew_delay;
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
  logic [5:0] delay; sample_t i_i, q_i, i_o, q_o;
  sample_t hi [$], hq [$];
  skew_delay #(.DW(6)) dut (.*);
  initial begin
    delay = 0; i_i = 0; q_i = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int d = 0; d < 64; d += 7) begin
      @(negedge clk) delay = 6'(d);
      hi.delete(); hq.delete();
      for (int n = 0; n < 150; n++) begin
        @(negedge clk);
        if (n >= d + 1 + 70) begin
          chk(i_o == hi[$ - d], $sformatf("delay %0d I", d));
          chk(q_o == hq[$ - d], $sformatf("delay %0d Q", d));
        end
        i_i = 16'($urandom); q_i = 16'($urandom);
        hi.push_back(i_i); hq.push_back(q_i);
      end
    end
    finish();
  end
endmodule
