// tb_instr_mem: writes random 128-bit words lane by lane and reads them back,
// checking the one-cycle read latency; then fills the whole memory and mixes
// single-lane overwrites with reads on consecutive cycles against a model.
module tb_instr_mem;
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
  logic wr_en = 0, rd_en = 0; logic [9:0] wr_addr = 0, rd_addr = 0; logic [1:0] wr_lane = 0;
  logic [31:0] wr_data = 0; logic [127:0] rd_data;
  logic [127:0] ref_m [16];
  instr_mem dut (.*);
  initial begin
    repeat (2) @(posedge clk);
    for (int a = 0; a < 16; a++) begin
      ref_m[a] = {$urandom, $urandom, $urandom, $urandom};
      for (int l = 0; l < 4; l++) begin
        @(negedge clk); wr_en = 1; wr_addr = 10'(a * 37); wr_lane = 2'(l); wr_data = ref_m[a][l*32 +: 32];
      end
    end
    @(negedge clk) wr_en = 0;
    for (int a = 0; a < 16; a++) begin
      @(negedge clk); rd_en = 1; rd_addr = 10'(a * 37);
      @(negedge clk); rd_en = 0;
      chk(rd_data === ref_m[a], $sformatf("word %0d", a));
    end
    // random traffic over the whole depth: single-lane overwrites, and reads on
    // consecutive cycles (data of the read in cycle t appears in cycle t+1)
    begin
      logic [127:0] full [1024];
      for (int a = 0; a < 1024; a++) begin
        full[a] = {$urandom, $urandom, $urandom, $urandom};
        for (int l = 0; l < 4; l++) begin
          @(negedge clk); wr_en = 1; wr_addr = 10'(a); wr_lane = 2'(l); wr_data = full[a][l*32 +: 32];
        end
      end
      @(negedge clk) wr_en = 0;
      for (int n = 0; n < 3000; n++) begin
        int a, wa, wl; logic [31:0] wd;
        a = $urandom_range(0, 1023); wa = $urandom_range(0, 1023); wl = $urandom_range(0, 3); wd = $urandom;
        rd_en = 1; rd_addr = 10'(a);
        wr_en = ($urandom_range(0, 3) == 0) && (wa != a); wr_addr = 10'(wa); wr_lane = 2'(wl); wr_data = wd;
        @(negedge clk);
        chk(rd_data === full[a], $sformatf("random read %0d", n));
        if (wr_en) full[wa][wl*32 +: 32] = wd;
      end
      rd_en = 0; wr_en = 0;
    end
    finish();
  end
endmodule
