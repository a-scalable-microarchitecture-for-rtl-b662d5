// tb_qubit_controller: end-to-end test of two controllers, a conductor and a
// performer (4 channels each), joined by a two-stage synchronization link.
// The host side loads programs, envelopes and settings over the word bus, starts
// the conductor, and afterwards reads back the measurement register, the
// statistics, the drop counter and the digitizer memory.
//  conductor ch0 (RF): shaped pulse, charge-sensing readout of a simulated qubit
//     that reads 1, conditional (active reset) pulse taken, phase change, SYNC
//     on the external trigger, STAP, reflectometry readout with the probe looped
//     back to the ADC, conditional pulse skipped;
//  conductor ch1 (DC): trapezoid through the slew limiter;
//  conductor ch2 (RF): quadrature correction, offset, FIR and skew set; its RDO
//     collides with ch0's and is dropped;
//  conductor ch3 and performer ch0 (DC): the same run of one-cycle STA
//     instructions, which must change the output every cycle and appear on both
//     controllers on the same cycles.
// Each mechanism is counted; one that never happens is a failure.
module tb_qubit_controller;
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
  initial begin repeat (50000) @(posedge clk); failures++; $display("watchdog expired"); finish(); end
  localparam int NCH = 4;
  logic h_wr [2], h_rd [2], h_rvalid [2]; logic [31:0] h_addr [2], h_wdata [2], h_rdata [2];
  logic sync_trig = 0; logic [1:0] link01 [3], link_out1, link_in0 = 2'd0;
  sample_t dac_i0 [NCH], dac_q0 [NCH], dac_i1 [NCH], dac_q1 [NCH];
  sample_t rdi0 [2], rdq0 [2], rdi1 [2], rdq1 [2], adc0 [2], adc1 [2];
  logic running0, running1; logic [NCH-1:0] done0, done1;

  qubit_controller #(.NCH(NCH), .IMEM_DEPTH(64), .DIG_DEPTH(256)) u0 (
    .clk, .rst_n, .h_wr(h_wr[0]), .h_rd(h_rd[0]), .h_addr(h_addr[0]), .h_wdata(h_wdata[0]),
    .h_rdata(h_rdata[0]), .h_rvalid(h_rvalid[0]), .sync_trig, .link_in(link_in0), .link_out(link01[0]),
    .dac_i(dac_i0), .dac_q(dac_q0), .ro_dac_i(rdi0), .ro_dac_q(rdq0), .adc(adc0),
    .running(running0), .ch_done(done0));
  qubit_controller #(.NCH(NCH), .IMEM_DEPTH(64), .DIG_DEPTH(256)) u1 (
    .clk, .rst_n, .h_wr(h_wr[1]), .h_rd(h_rd[1]), .h_addr(h_addr[1]), .h_wdata(h_wdata[1]),
    .h_rdata(h_rdata[1]), .h_rvalid(h_rvalid[1]), .sync_trig(1'b0), .link_in(link01[2]), .link_out(link_out1),
    .dac_i(dac_i1), .dac_q(dac_q1), .ro_dac_i(rdi1), .ro_dac_q(rdq1), .adc(adc1),
    .running(running1), .ch_done(done1));
  always_ff @(posedge clk) begin link01[1] <= link01[0]; link01[2] <= link01[1]; end

  // ---------------- host access ----------------
  task automatic hw(int u, logic [31:0] a, logic [31:0] d);
    @(negedge clk); h_wr[u] = 1; h_addr[u] = a; h_wdata[u] = d;
    @(negedge clk); h_wr[u] = 0;
  endtask
  task automatic hr(int u, logic [31:0] a, output logic [31:0] d);
    @(negedge clk); h_rd[u] = 1; h_addr[u] = a;
    @(negedge clk); h_rd[u] = 0; d = h_rdata[u];
  endtask
  function automatic logic [31:0] reg_a(int ch, int r); return {22'd0, 5'(ch), 5'(r)}; endfunction
  function automatic instr_t mk(opcode_e op, bit on, int dur, logic [31:0] p0,
                                cond_e c = COND_ALWAYS, int cb = 0, int env = 0);
    instr_t i; i = '0; i.op = op; i.on = on; i.dur = DUR_W'(dur); i.p0 = p0; i.cond = c;
    i.cond_bit = 5'(cb); i.env = 4'(env); return i;
  endfunction
  function automatic logic [31:0] rdo_p(bit adc, bit mode, int mbit, int thr);
    return {9'd0, adc, mode, 5'(mbit), 16'(thr)};
  endfunction
  task automatic load(int u, int ch, instr_t p [$]);
    foreach (p[k]) for (int l = 0; l < 4; l++)
      hw(u, {4'h1, 6'(ch), 20'(k), 2'(l)}, p[k][l*32 +: 32]);
    hw(u, reg_a(ch, 10), p.size());
  endtask

  // ---------------- mechanism counters ----------------
  int n_cond_taken, n_cond_skip, n_sync_wait, n_rdo_charge, n_rdo_refl, n_drop, n_dig,
      n_back2back, n_aligned, n_misaligned, n_trap_ramp, n_ch0_active, n_stop;
  // simulated qubit: the charge sensor shows a tunnelling blip in the first window
  int win_cyc;
  always @(negedge clk) begin
    if (u0.u_ro.unit_busy[0] && !u0.u_ro.g_unit[0].u_ru.mode) begin
      adc0[0] = (win_cyc == 12) ? 16'sd9000 : 16'sd500;
      win_cyc++;
    end else if (u0.u_ro.unit_busy[0]) adc0[0] = sample_t'(rdi0[0] >>> 1);   // reflected probe
    else begin adc0[0] = 16'sd0; win_cyc = 0; end
  end
  // performer/conductor alignment of the shared DC sequence
  always @(negedge clk) if (rst_n) begin
    if (dac_i0[3] != 0 || dac_i1[0] != 0) begin
      if (dac_i0[3] == dac_i1[0]) n_aligned++; else n_misaligned++;
    end
  end

  initial begin
    instr_t p [$]; logic [31:0] d; int t_sync, prev3, tr_max, n_ch2_drop_check;
    for (int u = 0; u < 2; u++) begin h_wr[u] = 0; h_rd[u] = 0; h_addr[u] = 0; h_wdata[u] = 0; end
    adc0[0] = 0; adc0[1] = 0; adc1[0] = 0; adc1[1] = 0;
    {n_cond_taken, n_cond_skip, n_sync_wait, n_rdo_charge, n_rdo_refl, n_drop, n_dig,
     n_back2back, n_aligned, n_misaligned, n_trap_ramp, n_ch0_active, n_stop} = '0;
    win_cyc = 0;
    repeat (3) @(posedge clk); @(negedge clk) rst_n = 1;

    // envelope memory 1: a raised ramp
    for (int a = 0; a < 64; a++) hw(0, {4'h2, 10'd0, 2'd0, 16'(a)}, 16000 + a * 200);

    // conductor ch0
    p = {};
    p.push_back(mk(OP_STF, 0, 1, 32'h0400_0000));
    p.push_back(mk(OP_STA, 1, 40, 32'd20000, COND_ALWAYS, 0, 1));
    p.push_back(mk(OP_RDO, 0, 30, rdo_p(0, 0, 0, 5000)));
    p.push_back(mk(OP_WAIT, 0, 3, 0));
    p.push_back(mk(OP_STA, 1, 10, 32'd15000, COND_IF_ONE, 0));
    p.push_back(mk(OP_STP, 1, 10, 32'h4000_0000));
    p.push_back(mk(OP_SYNC, 0, 1, 0));
    p.push_back(mk(OP_STAP, 1, 5, 32'h2000_2000));
    p.push_back(mk(OP_RDO, 0, 40, rdo_p(0, 1, 1, 1000)));
    p.push_back(mk(OP_WAIT, 0, 3, 0));
    p.push_back(mk(OP_STA, 1, 5, 32'd9000, COND_IF_ZERO, 1));
    load(0, 0, p);
    // conductor ch1: DC trapezoid
    p = {};
    p.push_back(mk(OP_STA, 1, 30, 32'd8000));
    p.push_back(mk(OP_WAIT, 0, 20, 0));
    load(0, 1, p);
    hw(0, reg_a(1, 0), 1); hw(0, reg_a(1, 9), 500);
    // conductor ch2: corrections set; its RDO collides with ch0's
    p = {};
    p.push_back(mk(OP_STF, 0, 1, 32'h0200_0000));
    p.push_back(mk(OP_STA, 1, 40, 32'd10000));
    p.push_back(mk(OP_RDO, 0, 5, rdo_p(0, 0, 2, 0)));
    load(0, 2, p);
    hw(0, reg_a(2, 3), 16'(-16'sd800)); hw(0, reg_a(2, 6), 16'sd250); hw(0, reg_a(2, 8), 7);
    hw(0, reg_a(2, 17), 16'(-16'sd2000));
    // conductor ch3 and performer ch0: one-cycle DC steps
    p = {};
    for (int k = 0; k < 12; k++) p.push_back(mk(OP_STA, 1, 0, 32'(1000 + k * 1000)));
    p.push_back(mk(OP_WAIT, 0, 2, 0));
    load(0, 3, p); load(1, 0, p);
    hw(0, reg_a(3, 0), 1); hw(1, reg_a(0, 0), 1);
    // readout probe of unit 0
    hw(0, reg_a(31, 3), 32'h0100_0000); hw(0, reg_a(31, 5), 16000);
    // multi-controller: conductor, performer; link of 2 stages -> conductor delay 3
    hw(0, reg_a(31, 1), 1); hw(0, reg_a(31, 2), 3);
    hw(1, reg_a(31, 1), 2); hw(1, reg_a(31, 2), 0);
    hr(0, reg_a(2, 8), d); chk(d == 7, "register read-back");

    // start
    hw(0, reg_a(31, 0), 1);
    t_sync = 0; prev3 = 0; tr_max = 0;
    for (int c = 0; c < 800; c++) begin
      @(negedge clk);
      if (u0.ev_cond_skip != 0) n_cond_skip += $countones(u0.ev_cond_skip);
      if (u0.ev_sync_wait[0]) begin n_sync_wait++; t_sync++; end
      if (t_sync == 25 && !sync_trig) sync_trig = 1;
      if (u0.ev_issue[0] && u0.ev_op[0] == OP_STA && u0.g_ch[0].u_ch.u_core.cur.cond == COND_IF_ONE &&
          u0.g_ch[0].u_ch.u_core.cur_ok) n_cond_taken++;
      if (u0.rdo[0].valid && !u0.rdo[0].mode) n_rdo_charge++;
      if (u0.rdo[0].valid && u0.rdo[0].mode) n_rdo_refl++;
      if (u0.dig_valid[0]) n_dig++;
      if (dac_i0[0] != 0 || dac_q0[0] != 0) n_ch0_active++;
      if (dac_i0[3] != 0 && prev3 != 0 && dac_i0[3] == 16'(prev3 + 1000)) n_back2back++;
      prev3 = dac_i0[3];
      if (dac_i0[1] > 0 && dac_i0[1] < 8000 && dac_i0[1] % 500 == 0) n_trap_ramp++;
      if (dac_i0[1] > tr_max) tr_max = dac_i0[1];
    end
    sync_trig = 0;
    chk(!running0 && !running1 && done0 == '1 && done1[0], "all programs finished");
    // results
    hr(0, 32'h3000_0000, d);  chk(d[1:0] == 2'b11, $sformatf("measurement register %b", d[1:0]));
    hr(0, 32'h3000_0100, d);  chk(d == 1, "one shot on bit 0");
    hr(0, 32'h3000_0200, d);  chk(d == 1, "bit 0 read 1 once");
    hr(0, 32'h3000_0101, d);  chk(d == 1, "one shot on bit 1");
    hr(0, reg_a(31, 7), d);   n_drop = d; chk(d == 1, $sformatf("dropped requests %0d", d));
    hr(0, 32'h5000_0000, d);  chk(d == 70 && n_dig == 70, $sformatf("digitizer holds %0d samples", d));
    hr(0, 32'h4000_000C, d);  chk(d == 32'(16'sd9000), "digitized blip at sample 12");
    hr(0, 32'h4000_0000, d);  chk(d == 32'(16'sd500), "digitized baseline");
    // ch0: 40 + 10 (taken) + 10 + 5 active cycles, the IF_ZERO pulse skipped
    chk(n_ch0_active == 65, $sformatf("ch0 active for %0d cycles, expected 65", n_ch0_active));
    chk(tr_max == 8000, "trapezoid reaches its level");
    chk(n_trap_ramp >= 2 * (8000 / 500 - 1), $sformatf("trapezoid ramp samples %0d", n_trap_ramp));
    chk(n_back2back == 11, $sformatf("one-cycle steps back to back: %0d of 11", n_back2back));
    chk(n_aligned == 12 && n_misaligned == 0, $sformatf("conductor/performer aligned %0d, misaligned %0d", n_aligned, n_misaligned));
    // stop command during a run
    hw(0, reg_a(31, 0), 1);
    repeat (12) @(negedge clk);
    chk(running0 && running1, "second run running on both");
    hw(0, reg_a(31, 0), 2);
    repeat (8) @(negedge clk);
    if (!running0 && !running1) n_stop++;
    // mechanism coverage
    chk(n_cond_taken > 0, "mechanism: conditional pulse taken");
    chk(n_cond_skip > 0, "mechanism: conditional instruction skipped");
    chk(n_sync_wait > 0, "mechanism: SYNC wait");
    chk(n_rdo_charge > 0, "mechanism: charge-sensing readout");
    chk(n_rdo_refl > 0, "mechanism: reflectometry readout");
    chk(n_drop > 0, "mechanism: readout request dropped");
    chk(n_dig > 0, "mechanism: raw digitizing");
    chk(n_back2back > 0, "mechanism: back-to-back one-cycle instructions");
    chk(n_aligned > 0, "mechanism: multi-controller synchronized start");
    chk(n_trap_ramp > 0, "mechanism: DC slew (trapezoid)");
    chk(n_stop > 0, "mechanism: multi-controller stop");
    $display("mechanisms: cond_taken=%0d cond_skip=%0d sync_wait=%0d rdo_charge=%0d rdo_refl=%0d drop=%0d dig=%0d back2back=%0d aligned=%0d ramp=%0d stop=%0d",
             n_cond_taken, n_cond_skip, n_sync_wait, n_rdo_charge, n_rdo_refl, n_drop, n_dig, n_back2back, n_aligned, n_trap_ramp, n_stop);
    finish();
  end
endmodule
