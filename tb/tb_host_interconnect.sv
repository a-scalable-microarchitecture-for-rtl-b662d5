// tb_host_interconnect: every region of the address map is decoded to the right
// strobe and address, and read data return from the right source one cycle
// later; then random writes over all regions are decoded against the map.
module tb_host_interconnect;
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
  localparam int NCH = 4;
  logic h_wr = 0, h_rd = 0; logic [31:0] h_addr = 0, h_wdata = 0, h_rdata; logic h_rvalid;
  logic ctrl_wr, ctrl_rd; logic [9:0] ctrl_addr; logic [31:0] ctrl_rdata, stats_rdata, wdata;
  logic [NCH-1:0] imem_wr; logic [9:0] imem_addr; logic [1:0] imem_lane;
  logic [2:0] env_wr; logic [9:0] env_addr; logic [31:0] meas;
  logic stats_rd, stats_sel; logic [4:0] stats_bit; logic [1:0] dig_rd; logic [11:0] dig_addr;
  sample_t dig_rdata [2]; logic [12:0] dig_count [2];
  host_interconnect #(.NCH(NCH), .IMEM_AW(10), .DIG_AW(12)) dut (.*);
  // simple registered sources
  always_ff @(posedge clk) begin
    if (ctrl_rd) ctrl_rdata <= {22'h3AB, ctrl_addr};
    if (stats_rd) stats_rdata <= {26'd0, stats_sel, stats_bit};
    for (int u = 0; u < 2; u++) if (dig_rd[u]) dig_rdata[u] <= 16'(dig_addr) ^ 16'(u * 16'h5000);
  end
  task automatic rd(logic [31:0] a, output logic [31:0] d);
    @(negedge clk); h_rd = 1; h_addr = a; @(negedge clk); h_rd = 0; chk(h_rvalid, "rvalid"); d = h_rdata;
  endtask
  initial begin
    logic [31:0] d;
    meas = 32'hDEAD_BEEF; dig_count[0] = 13'd17; dig_count[1] = 13'd4096;
    repeat (2) @(posedge clk); @(negedge clk) rst_n = 1;
    @(negedge clk); h_wr = 1; h_addr = {4'h1, 6'd2, 20'd777, 2'd3}; h_wdata = 32'h1234;
    #1 chk(imem_wr == 4'b0100 && imem_addr == 10'd777 && imem_lane == 2'd3 && wdata == 32'h1234, "instruction write");
    chk(!ctrl_wr && env_wr == 0, "no other write");
    @(negedge clk); h_addr = {4'h2, 10'd0, 2'd1, 16'd513};
    #1 chk(env_wr == 3'b010 && env_addr == 10'd513 && imem_wr == 0, "envelope write");
    @(negedge clk); h_addr = {4'h0, 18'd0, 10'd345};
    #1 chk(ctrl_wr && ctrl_addr == 10'd345 && env_wr == 0, "register write");
    @(negedge clk) h_wr = 0;
    rd({4'h0, 18'd0, 10'd99}, d);   chk(d == {22'h3AB, 10'd99}, "register read");
    rd({4'h3, 18'd0, 10'h000}, d);  chk(d == 32'hDEAD_BEEF, "measurement register read");
    rd({4'h3, 18'd0, 10'h205}, d);  chk(d == {26'd0, 1'b1, 5'd5}, "ones read");
    rd({4'h3, 18'd0, 10'h10C}, d);  chk(d == {26'd0, 1'b0, 5'd12}, "shots read");
    rd({4'h4, 7'd0, 1'b1, 8'd0, 12'd300}, d); chk(d == 32'(16'(300) ^ 16'h5000), "digitizer unit 1 read");
    rd({4'h4, 7'd0, 1'b0, 8'd0, 12'd301}, d); chk(d == 32'd301, "digitizer unit 0 read");
    rd({4'h5, 27'd0, 1'b1}, d);     chk(d == 4096, "digitizer count");
    // random writes over all regions (6..15 and envelope index 3 are unmapped):
    // exactly the strobe the map names fires, with the map's fields
    for (int n = 0; n < 2000; n++) begin
      logic [31:0] a; int reg_n, ch, em;
      a = $urandom; a[31:28] = 4'($urandom_range(0, 7));
      if (a[31:28] == 4'h1) a[27:22] = 6'($urandom_range(0, NCH));   // mostly existing channels
      @(negedge clk); h_wr = 1; h_addr = a; h_wdata = $urandom;
      #1;
      reg_n = int'(a[31:28]); ch = int'(a[27:22]); em = int'(a[17:16]);
      chk(ctrl_wr == (reg_n == 0) && (reg_n != 0 || ctrl_addr == a[9:0]), $sformatf("random write %h: register strobe", a));
      for (int c = 0; c < NCH; c++)
        chk(imem_wr[c] == (reg_n == 1 && ch == c), $sformatf("random write %h: instruction strobe %0d", a, c));
      if (reg_n == 1) chk(imem_addr == a[11:2] && imem_lane == a[1:0] && wdata == h_wdata, $sformatf("random write %h: instruction fields", a));
      for (int e = 0; e < 3; e++)
        chk(env_wr[e] == (reg_n == 2 && em == e), $sformatf("random write %h: envelope strobe %0d", a, e));
      if (reg_n == 2) chk(env_addr == a[9:0], $sformatf("random write %h: envelope address", a));
      chk(!stats_rd && dig_rd == 0 && !ctrl_rd, $sformatf("random write %h: no read strobe", a));
    end
    @(negedge clk) h_wr = 0;
    finish();
  end
endmodule
