// tb_readout_controller: requests from several channels at once; the lowest
// channel per unit wins, the others and requests to a busy unit are counted as
// dropped; both units measure in parallel and report to their bits. Then 600
// cycles of random requests from all channels are compared with a reference
// model of the arbitration, the busy rule and the window timing.
module tb_readout_controller;
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
  rdo_req_t req [NCH]; logic [31:0] probe_freq [2]; logic signed [15:0] probe_amp [2];
  sample_t adc [2], probe_i [2], probe_q [2], dig_data [2];
  logic [1:0] res_valid, res_val, dig_valid, unit_busy; logic [4:0] res_mbit [2];
  logic [31:0] drop_cnt;
  readout_controller #(.NCH(NCH), .NU(2)) dut (.*);
  function automatic rdo_req_t mk(bit adcsel, int mbit, int thr, int win);
    rdo_req_t r; r = '0; r.valid = 1; r.adc = adcsel; r.mode = 0; r.mbit = 5'(mbit);
    r.thr = 16'(thr); r.window = DUR_W'(win); return r;
  endfunction
  int nres [2];
  initial begin
    foreach (req[c]) req[c] = '0;
    probe_freq[0] = 0; probe_freq[1] = 0; probe_amp[0] = 0; probe_amp[1] = 0;
    adc[0] = 16'sd100; adc[1] = 16'sd9000;
    repeat (2) @(posedge clk); @(negedge clk) rst_n = 1;
    // channels 1 and 3 to unit 0, channel 2 to unit 1, all in one cycle
    req[1] = mk(0, 4, 500, 20);  req[3] = mk(0, 5, 50, 20); req[2] = mk(1, 6, 5000, 30);
    @(negedge clk);
    foreach (req[c]) req[c] = '0;
    chk(unit_busy == 2'b11, "both units busy");
    // a request to the busy unit 0
    req[0] = mk(0, 7, 0, 5);
    @(negedge clk) req[0] = '0;
    nres[0] = 0; nres[1] = 0;
    for (int n = 0; n < 40; n++) begin
      for (int u = 0; u < 2; u++) if (res_valid[u]) begin
        nres[u]++;
        if (u == 0) chk(res_mbit[0] == 5'd4 && res_val[0] == 1'b0, "unit 0: channel 1 wins, 100 below 500");
        if (u == 1) chk(res_mbit[1] == 5'd6 && res_val[1] == 1'b1, "unit 1: 9000 crosses 5000");
      end
      @(negedge clk);
    end
    chk(nres[0] == 1 && nres[1] == 1, "one result per unit");
    chk(drop_cnt == 2, $sformatf("dropped %0d, expected 2", drop_cnt));
    // random traffic against a reference model of arbitration, busy units and
    // window timing: request issued in cycle t with window W is performed if
    // its unit's previous window ended before t, its outcome appears in cycle
    // t + W + 1
    begin
      int free_at [2], exp_t [2], exp_bit [2]; bit exp_val [2]; int drops, t;
      int n_won = 0, n_lost = 0;
      free_at[0] = 0; free_at[1] = 0; exp_t[0] = -1; exp_t[1] = -1; drops = 2;
      adc[0] = 16'sd1200; adc[1] = -16'sd300;
      repeat (10) @(negedge clk);
      for (t = 0; t < 600; t++) begin
        bit taken [2]; taken[0] = 0; taken[1] = 0;
        foreach (req[c]) begin
          req[c] = '0;
          if (t < 560 && $urandom_range(0, 9) < 3)
            req[c] = mk(1'($urandom), $urandom_range(0, 31), $urandom_range(0, 1) ? 1000 : -1000,
                        $urandom_range(1, 6));
        end
        for (int c = 0; c < NCH; c++) if (req[c].valid) begin
          int u;
          u = int'(req[c].adc);
          if (!taken[u] && t >= free_at[u]) begin
            taken[u] = 1; n_won++;
            free_at[u] = t + int'(req[c].window) + 1;
            exp_t[u] = t + int'(req[c].window) + 1;
            exp_bit[u] = int'(req[c].mbit);
            exp_val[u] = adc[u] > req[c].thr;
          end else begin drops++; n_lost++; end
        end
        @(negedge clk);
        for (int u = 0; u < 2; u++) begin
          chk(res_valid[u] == (exp_t[u] == t + 1), $sformatf("unit %0d result at %0d, expected at %0d", u, t + 1, exp_t[u]));
          if (res_valid[u] && exp_t[u] == t + 1)
            chk(int'(res_mbit[u]) == exp_bit[u] && res_val[u] == exp_val[u],
                $sformatf("unit %0d bit %0d value %0d, expected bit %0d value %0d", u, res_mbit[u], res_val[u], exp_bit[u], exp_val[u]));
        end
      end
      chk(drop_cnt == 32'(drops), $sformatf("dropped %0d, model %0d", drop_cnt, drops));
      chk(n_won > 50 && n_lost > 50, $sformatf("traffic: %0d performed, %0d dropped", n_won, n_lost));
    end
    finish();
  end
endmodule
