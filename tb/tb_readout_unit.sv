// tb_readout_unit: charge-sensing windows with and without a threshold crossing,
// reflectometry windows whose demodulated mean lies above or below the
// threshold, the result timing (window + 1 cycles after the request), the probe
// tone, raw sample output and refusal of a request while busy.
module tb_readout_unit;
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
  initial begin repeat (200000) @(posedge clk); failures++; $display("watchdog expired"); finish(); end
  rdo_req_t req; logic [31:0] probe_freq; logic signed [15:0] probe_amp; sample_t adc_i;
  logic busy, req_drop, res_valid, res_val, dig_valid; logic [4:0] res_mbit;
  sample_t probe_i, probe_q, dig_data; logic signed [63:0] sum_i, sum_q;
  readout_unit dut (.*);

  // run one window; adc_fn decides the ADC sample from the cycle index
  task automatic run(input bit mode, input int win, input int thr, input int level,
                     input int blip_at, input bit exp_val, input string name);
    int lat; int ndig;
    @(negedge clk);
    req = '0; req.valid = 1; req.mode = mode; req.window = DUR_W'(win); req.thr = 16'(thr);
    req.mbit = 5'($urandom);
    @(negedge clk);
    req.valid = 0;
    lat = 1; ndig = 0;
    while (!res_valid && lat < win + 10) begin
      adc_i = (lat - 1 == blip_at) ? 16'sd20000 : 16'(level + int'($urandom_range(0, 20)) - 10);
      if (dig_valid) begin ndig++; chk(dig_data == adc_i, "raw sample"); end
      if (mode && busy) chk(probe_i != 0 || probe_q != 0 || probe_amp == 0, "probe tone");
      if (!mode) chk(probe_i == 0 && probe_q == 0, "no probe in charge sensing");
      @(negedge clk); lat++;
    end
    chk(lat == win + 1, $sformatf("%s: result %0d cycles after request", name, lat));
    chk(ndig == win, $sformatf("%s: %0d raw samples", name, ndig));
    chk(res_val == exp_val, $sformatf("%s: outcome %0d", name, res_val));
    chk(res_mbit == req.mbit, "result bit index");
    chk(!busy, "idle after window");
  endtask

  initial begin
    req = '0; probe_freq = 0; probe_amp = 16'sd20000; adc_i = 0;
    repeat (2) @(posedge clk); @(negedge clk) rst_n = 1;
    run(0, 50, 5000, 1000, 20, 1, "charge blip");
    run(0, 50, 5000, 1000, -1, 0, "charge no blip");
    run(0, 1, 5000, 1000, 0, 1, "charge one-cycle window blip");
    // reflectometry at zero probe frequency: mean I = level
    run(1, 64, 3000, 4000, -1, 1, "reflectometry above");
    run(1, 64, 5000, 4000, -1, 0, "reflectometry below");
    run(1, 64, -5000, -4000, -1, 1, "reflectometry negative above");
    // reflectometry with a tone: loop the probe back into the ADC
    probe_freq = 32'h0200_0000;
    @(negedge clk);
    req = '0; req.valid = 1; req.mode = 1; req.window = 256; req.thr = 16'sd8000; req.mbit = 5'd9;
    @(negedge clk); req.valid = 0;
    // a second request while busy is refused
    req.valid = 1; #1 chk(req_drop, "busy request refused"); @(negedge clk); req.valid = 0;
    while (!res_valid) begin adc_i = probe_i; @(negedge clk); end
    chk(res_val == 1'b1 && res_mbit == 5'd9, "loop-back tone demodulates above threshold");
    chk(sum_i > 0, "in-phase sum positive");
    finish();
  end
endmodule
