// tb_meas_stats: random outcomes on two ports (often to the same bit in the
// same cycle); shot and one counts of all 32 bits read back match reference
// counters; clear zeroes them all.
module tb_meas_stats;
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
  logic clear = 0, rd_en = 0, rd_sel = 0; logic [1:0] wr_valid, wr_val; logic [4:0] wr_bit [2], rd_bit;
  logic [31:0] rd_data;
  int shots [32], ones [32];
  meas_stats dut (.*);
  initial begin
    wr_valid = 0; wr_val = 0; wr_bit[0] = 0; wr_bit[1] = 0; rd_bit = 0;
    foreach (shots[b]) begin shots[b] = 0; ones[b] = 0; end
    repeat (2) @(posedge clk); @(negedge clk) rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      wr_valid = 2'($urandom); wr_val = 2'($urandom);
      wr_bit[0] = 5'($urandom_range(0, (n < 1000) ? 5 : 31)); wr_bit[1] = 5'($urandom_range(0, (n < 1000) ? 5 : 31));
      for (int w = 0; w < 2; w++) if (wr_valid[w]) begin shots[wr_bit[w]]++; ones[wr_bit[w]] += wr_val[w]; end
      @(negedge clk);
    end
    wr_valid = 0;
    for (int b = 0; b < 32; b++) begin
      rd_en = 1; rd_bit = 5'(b); rd_sel = 0; @(negedge clk);
      chk(int'(rd_data) == shots[b], $sformatf("bit %0d shots %0d exp %0d", b, rd_data, shots[b]));
      rd_sel = 1; @(negedge clk);
      chk(int'(rd_data) == ones[b], $sformatf("bit %0d ones %0d exp %0d", b, rd_data, ones[b]));
    end
    rd_en = 0; clear = 1; @(negedge clk) clear = 0;
    for (int b = 0; b < 32; b++) begin
      rd_en = 1; rd_bit = 5'(b); rd_sel = 1'(b); @(negedge clk);
      chk(rd_data == 0, $sformatf("bit %0d cleared", b));
    end
    finish();
  end
endmodule
