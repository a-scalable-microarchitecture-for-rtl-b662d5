// tb_predistortion_fir: random taps and samples against a direct convolution.
module tb_predistortion_fir;
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
  coef_t [7:0] coef; sample_t i_i, q_i, i_o, q_o;
  int xi [$], xq [$];
  predistortion_fir #(.TAPS(8)) dut (.*);
  function automatic int conv(ref int x [$], input coef_t [7:0] c);
    longint s = 0;
    for (int k = 0; k < 8; k++) s += longint'(x[x.size() - 1 - k]) * longint'(c[k]);
    s = s >>> 14;
    return s > 32767 ? 32767 : (s < -32768 ? -32768 : int'(s));
  endfunction
  initial begin
    coef = '0; i_i = 0; q_i = 0;
    for (int k = 0; k < 8; k++) begin xi.push_back(0); xq.push_back(0); end
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int set = 0; set < 4; set++) begin
      for (int k = 0; k < 8; k++) coef[k] = (set == 0) ? (k == 0 ? 16'sd16384 : 16'sd0) : 16'($signed($urandom) >>> 19);
      for (int n = 0; n < 100; n++) begin
        i_i = 16'($urandom); q_i = 16'($urandom) >>> 2;
        xi.push_back(int'(i_i)); xq.push_back(int'(q_i));
        @(negedge clk);
        chk(int'(i_o) == conv(xi, coef), $sformatf("set %0d n %0d I %0d", set, n, i_o));
        chk(int'(q_o) == conv(xq, coef), "Q");
        if (set == 0) chk(i_o == i_i, "identity taps");
      end
    end
    finish();
  end
endmodule
