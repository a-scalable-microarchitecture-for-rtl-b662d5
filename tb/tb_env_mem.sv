// tb_env_mem: fills the memory and reads random addresses on all ports at once.
module tb_env_mem;
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
  logic wr_en = 0; logic [9:0] wr_addr = 0; logic signed [15:0] wr_data = 0;
  logic [3:0][9:0] rd_addr; logic signed [15:0] rd_data [4];
  logic signed [15:0] ref_m [1024];
  env_mem #(.DEPTH(1024), .N_RD(4)) dut (.*);
  initial begin
    rd_addr = '0;
    for (int a = 0; a < 1024; a++) begin
      @(negedge clk); wr_en = 1; wr_addr = 10'(a); wr_data = 16'($urandom); ref_m[a] = wr_data;
    end
    @(negedge clk) wr_en = 0;
    for (int n = 0; n < 200; n++) begin
      for (int k = 0; k < 4; k++) rd_addr[k] = 10'($urandom);
      @(negedge clk);
      for (int k = 0; k < 4; k++) chk(rd_data[k] == ref_m[rd_addr[k]], $sformatf("port %0d", k));
    end
    finish();
  end
endmodule
