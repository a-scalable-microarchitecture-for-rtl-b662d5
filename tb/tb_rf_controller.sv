// tb_rf_controller: plays pulses with several amplitudes, envelopes, frequencies
// and phases and compares I/Q three cycles later with A*e*cos/sin computed in
// real arithmetic (tolerance 3 LSB); checks zero output with the channel off.
module tb_rf_controller;
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
  logic nco_clear; pulse_t pulse_i; sample_t env_s, i_o, q_o;
  rf_controller dut (.*);
  localparam real PI = 3.14159265358979;
  // history of driven values, indexed by cycle
  real exp_i [$], exp_q [$]; bit act [$];
  function automatic real absr(real v); return v < 0.0 ? -v : v; endfunction
  logic [31:0] acc_m; sample_t env_next;
  initial begin
    pulse_i = '0; nco_clear = 0; env_s = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk) nco_clear = 1;
    @(negedge clk) nco_clear = 0; acc_m = 0;
    for (int n = 0; n < 2000; n++) begin
      // new parameters every 50 cycles
      if (n % 50 == 0) begin
        pulse_i.active = (n % 200) != 150;
        pulse_i.amp    = 16'($urandom);
        pulse_i.freq   = $urandom >> 3;
        pulse_i.phase  = 16'($urandom);
      end
      env_next = 16'($urandom) >>> 1;
      // expected output for this cycle's parameters: NCO phase of acc_m
      begin
        logic [31:0] ph; real th, a;
        ph = acc_m + {pulse_i.phase, 16'd0};
        th = 2.0 * PI * real'(ph[31:22]) / 1024.0;
        a  = real'(pulse_i.amp) / 32768.0 * real'(env_next) / 32768.0;
        exp_i.push_back(a * $cos(th) * 32767.0);
        exp_q.push_back(a * $sin(th) * 32767.0);
        act.push_back(pulse_i.active);
      end
      acc_m = acc_m + pulse_i.freq;
      @(posedge clk);
      #1 env_s = env_next;      // envelope sample arrives one cycle after pulse_i
      @(negedge clk);
      if (n >= 3) begin
        int k; k = exp_i.size() - 3;
        if (act[k]) begin
          chk(absr(real'(i_o) - exp_i[k]) <= 3.0, $sformatf("n%0d I %0d exp %f", n, i_o, exp_i[k]));
          chk(absr(real'(q_o) - exp_q[k]) <= 3.0, $sformatf("n%0d Q %0d exp %f", n, q_o, exp_q[k]));
        end else chk(i_o == 0 && q_o == 0, "off");
      end
    end
    finish();
  end
endmodule
