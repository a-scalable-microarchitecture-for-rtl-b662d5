// tb_digitizer_mem: records bursts of samples, reads them back in order, fills
// the memory to the overflow point and clears it.
module tb_digitizer_mem;
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
  logic clear = 0, wr_valid = 0, rd_en = 0, overflow; sample_t wr_data = 0, rd_data;
  logic [5:0] rd_addr = 0; logic [6:0] count;
  sample_t ref_m [$];
  digitizer_mem #(.DEPTH(64)) dut (.*);
  initial begin
    repeat (2) @(posedge clk); @(negedge clk) rst_n = 1;
    for (int n = 0; n < 100; n++) begin
      wr_valid = ($urandom_range(0, 2) != 0); wr_data = 16'($urandom);
      if (wr_valid && ref_m.size() < 64) ref_m.push_back(wr_data);
      @(negedge clk);
    end
    wr_valid = 0;
    chk(int'(count) == ref_m.size(), $sformatf("count %0d exp %0d", count, ref_m.size()));
    chk(overflow == (ref_m.size() == 64), "overflow flag");
    for (int a = 0; a < ref_m.size(); a++) begin
      rd_en = 1; rd_addr = 6'(a); @(negedge clk);
      chk(rd_data == ref_m[a], $sformatf("sample %0d", a));
    end
    rd_en = 0;
    clear = 1; @(negedge clk) clear = 0;
    chk(count == 0 && !overflow, "cleared");
    wr_valid = 1; wr_data = 16'sd77; @(negedge clk) wr_valid = 0;
    rd_en = 1; rd_addr = 0; @(negedge clk);
    chk(rd_data == 16'sd77 && count == 1, "records from the start after clear");
    finish();
  end
endmodule
