// tb_ctrl_regs: reset defaults, write/read-back of every per-channel and global
// register, the command strobes and the read-only status inputs.
module tb_ctrl_regs;
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
  localparam int NCH = 3;
  logic wr_en = 0, rd_en = 0; logic [9:0] addr = 0; logic [31:0] wdata = 0, rdata;
  ch_cfg_t cfg [NCH]; exec_mode_e exec_mode; logic [15:0] link_delay;
  logic [31:0] ro_freq [2]; logic signed [15:0] ro_amp [2];
  logic cmd_start, cmd_stop, clr_meas, clr_stats, clr_dig;
  ctrl_regs #(.NCH(NCH)) dut (.*, .running(1'b1), .drop_cnt(32'd42), .dig_overflow(2'b10));
  task automatic wr(int a, int d); @(negedge clk); wr_en = 1; addr = 10'(a); wdata = d; @(negedge clk) wr_en = 0; endtask
  task automatic rd(int a, output logic [31:0] d); @(negedge clk); rd_en = 1; addr = 10'(a); @(negedge clk) rd_en = 0; d = rdata; endtask
  int regs [] = '{0, 1, 2, 3, 4, 5, 6, 7, 8, 9, 10, 16, 17, 18, 19, 20, 21, 22, 23};
  int mask [] = '{1, 'hFFFF, 'hFFFF, 'hFFFF, 'hFFFF, 'hFFFF, 'hFFFF, 'hFFFF, 'h3F, 'hFFFF, 'h3FF,
                  'hFFFF, 'hFFFF, 'hFFFF, 'hFFFF, 'hFFFF, 'hFFFF, 'hFFFF, 'hFFFF};
  initial begin
    logic [31:0] d; int v [NCH][19];
    repeat (2) @(posedge clk); @(negedge clk) rst_n = 1;
    chk(cfg[1].gain == 16384 && cfg[1].a11 == 16384 && cfg[1].a22 == 16384 && cfg[1].a12 == 0 &&
        cfg[1].fir[0] == 16384 && cfg[1].fir[1] == 0 && cfg[1].skew == 0, "reset defaults");
    for (int c = 0; c < NCH; c++) for (int r = 0; r < 19; r++) begin
      v[c][r] = $urandom & mask[r]; wr(c * 32 + regs[r], v[c][r]);
    end
    for (int c = 0; c < NCH; c++) for (int r = 0; r < 19; r++) begin
      int e; rd(c * 32 + regs[r], d);
      e = v[c][r];
      if (mask[r] == 'hFFFF && (e & 'h8000) != 0) e = e | 32'hFFFF_0000;  // signed fields read sign-extended
      if (r == 9) e = v[c][r];                                           // slew is unsigned
      chk(d == e, $sformatf("ch%0d reg%0d = %h exp %h", c, regs[r], d, e));
    end
    chk(cfg[2].skew == 6'(v[2][8]) && cfg[2].fir[7] == 16'(v[2][18]) && cfg[0].prog_len == 10'(v[0][10]), "fields drive cfg");
    wr(31 * 32 + 1, 2); wr(31 * 32 + 2, 321); wr(31 * 32 + 3, 32'hABCD_0123); wr(31 * 32 + 6, 16'h8001);
    chk(exec_mode == MODE_PERFORMER && link_delay == 321 && ro_freq[0] == 32'hABCD_0123 && ro_amp[1] == -16'sd32767, "globals");
    rd(31 * 32 + 7, d); chk(d == 42, "drop count");
    rd(31 * 32 + 8, d); chk(d == 2, "overflow flags");
    rd(31 * 32 + 0, d); chk(d == 1, "running");
    @(negedge clk); wr_en = 1; addr = 10'(31 * 32); wdata = 32'h1F;
    @(negedge clk) wr_en = 0;
    chk(cmd_start && cmd_stop && clr_meas && clr_stats && clr_dig, "strobes");
    @(negedge clk) chk(!cmd_start && !clr_dig, "strobes last one cycle");
    finish();
  end
endmodule
