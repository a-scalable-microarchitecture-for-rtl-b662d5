// tb_channel_pipeline: one channel with a real envelope memory.
//  1. DC path: a level set by STA reaches the DAC 8 + skew cycles after the
//     instruction begins, scaled by the gain and shifted by the offset, for as
//     many cycles as the instruction lasts.
//  2. RF path: a shaped pulse (one silent STF, then STA with a ramp envelope) has I/Q magnitude amp*envelope (within 0.3 %) and
//     the same latency; the quadrature correction matrix swaps I and Q.
module tb_channel_pipeline;
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
  logic start = 0, stop = 0, imem_wr = 0, sync_trig = 0; ch_cfg_t cfg;
  logic [9:0] imem_addr = 0; logic [1:0] imem_lane = 0; logic [31:0] imem_data = 0;
  logic [9:0] env_addr; sample_t env_s [N_ENV], env_rd [1]; sample_t dac_i, dac_q;
  rdo_req_t rdo; logic busy, done, ev_issue, ev_cond_skip, ev_sync_wait; opcode_e ev_op;
  logic env_wr = 0; logic [9:0] env_waddr = 0; logic signed [15:0] env_wdata = 0;
  channel_pipeline dut (.*, .meas(32'd0));
  env_mem #(.DEPTH(1024), .N_RD(1)) u_env (.clk, .wr_en(env_wr), .wr_addr(env_waddr), .wr_data(env_wdata),
                                           .rd_addr(env_addr), .rd_data(env_rd));
  always_comb begin env_s[0] = env_rd[0]; env_s[1] = 16'sd0; env_s[2] = 16'sd0; end

  function automatic instr_t mk(opcode_e op, bit on, int dur, logic [31:0] p0, int env = 0);
    instr_t i; i = '0; i.op = op; i.on = on; i.dur = DUR_W'(dur); i.p0 = p0; i.env = 4'(env); return i;
  endfunction
  task automatic load(instr_t p [$]);
    foreach (p[k]) for (int l = 0; l < 4; l++) begin
      @(negedge clk); imem_wr = 1; imem_addr = 10'(k); imem_lane = 2'(l); imem_data = p[k][l*32 +: 32];
    end
    @(negedge clk) imem_wr = 0;
    cfg.prog_len = 10'(p.size());
  endtask
  // returns cycles from the first instruction issue to the first non-zero DAC sample
  task automatic run_until_output(output int lat);
    while (busy) @(negedge clk);
    repeat (20) @(negedge clk);
    @(negedge clk) start = 1; @(negedge clk) start = 0;
    while (!ev_issue) @(negedge clk);
    lat = 0;
    while (dac_i == 0 && dac_q == 0 && lat < 100) begin @(negedge clk); lat++; end
  endtask

  initial begin
    instr_t p [$]; int lat, n;
    cfg = '0; cfg.gain = 16'sd8192; cfg.a11 = 16'sd16384; cfg.a22 = 16'sd16384; cfg.fir[0] = 16'sd16384;
    cfg.dc_mode = 1; cfg.skew = 6'd5; cfg.off_i = 16'sd100; cfg.off_q = 16'sd0;
    for (int a = 0; a < 1024; a++) begin
      @(negedge clk); env_wr = 1; env_waddr = 10'(a); env_wdata = 16'(a * 32);
    end
    @(negedge clk) env_wr = 0;
    repeat (2) @(posedge clk); @(negedge clk) rst_n = 1;
    // 1. DC path (the offset is on from the start, so look for the level itself)
    cfg.off_i = 16'sd0;
    p = {};
    p.push_back(mk(OP_STA, 1, 20, 32'd10000));
    p.push_back(mk(OP_WAIT, 0, 10, 0));
    load(p);
    run_until_output(lat);
    chk(lat == 8 + 5, $sformatf("DC latency %0d, expected 13", lat));
    n = 0;
    while (dac_i != 0) begin
      chk(dac_i == 16'sd5000, $sformatf("DC level %0d, expected 5000", dac_i)); n++; @(negedge clk);
    end
    chk(n == 20, $sformatf("DC pulse %0d cycles, expected 20", n));
    cfg.off_i = 16'sd100; repeat (10) @(negedge clk);
    chk(dac_i == 16'sd100, "DC offset with the channel idle");
    // 2. RF path, shaped by the ramp envelope, gain 1, skew 0
    cfg.off_i = 0; cfg.dc_mode = 0; cfg.skew = 0; cfg.gain = 16'sd16384;
    repeat (20) @(negedge clk);
    p = {};
    p.push_back(mk(OP_STF, 0, 1, 32'h0300_0000));
    p.push_back(mk(OP_STA, 1, 200, 32'd30000, 1));
    load(p);
    run_until_output(lat);
    // envelope sample 0 is zero, so the first non-zero output is sample 1
    chk(lat == 1 + 1 + 8, $sformatf("RF latency %0d, expected 10", lat));
    for (int k = 1; k < 150; k++) begin
      real mag, e;
      @(negedge clk);
      mag = $sqrt(real'(dac_i) ** 2 + real'(dac_q) ** 2);
      e = 30000.0 * real'((k + 1) * 32) / 32768.0;
      chk(mag > e * 0.997 - 3.0 && mag < e * 1.003 + 3.0, $sformatf("k%0d magnitude %f expected %f", k, mag, e));
    end
    // swap matrix
    cfg.a11 = 0; cfg.a22 = 0; cfg.a12 = 16'sd16384; cfg.a21 = 16'sd16384;
    begin
      sample_t pi, pq; logic [31:0] dummy;
      // compare the output with the unswapped path of the same cycle is not possible; check
      // that q after the swap equals i before it by running the same program twice
      sample_t ref_i [$];
      cfg.a11 = 16'sd16384; cfg.a22 = 16'sd16384; cfg.a12 = 0; cfg.a21 = 0;
      run_until_output(lat);
      for (int k = 0; k < 50; k++) begin ref_i.push_back(dac_i); @(negedge clk); end
      repeat (200) @(negedge clk);
      cfg.a11 = 0; cfg.a22 = 0; cfg.a12 = 16'sd16384; cfg.a21 = 16'sd16384;
      run_until_output(lat);
      for (int k = 0; k < 50; k++) begin chk(dac_q == ref_i[k], $sformatf("k%0d swapped Q %0d I %0d original I %0d", k, dac_q, dac_i, ref_i[k])); @(negedge clk); end
    end
    finish();
  end
endmodule
