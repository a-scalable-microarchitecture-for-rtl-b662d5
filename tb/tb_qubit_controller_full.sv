// tb_qubit_controller_full: the controller at its full size (22 channels,
// default memories), one complete operation. Every channel gets a program over
// the host bus: even channels play an RF pulse of their own frequency, odd
// channels a DC level; channel 0 then reads out a simulated charge sensor and
// plays a conditional pulse that depends on the outcome. Checks: all 22
// channels start on the same cycle and pulse for exactly the programmed 20
// cycles, DC levels are exact, RF magnitudes equal the amplitude, the outcome
// reaches the measurement register and the conditional pulse follows it.
module tb_qubit_controller_full;
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
  initial begin repeat (40000) @(posedge clk); failures++; $display("watchdog expired"); finish(); end
  logic h_wr = 0, h_rd = 0, h_rvalid; logic [31:0] h_addr = 0, h_wdata = 0, h_rdata;
  logic [1:0] link_out; sample_t dac_i [N_CH], dac_q [N_CH], rdi [N_ADC], rdq [N_ADC], adc [N_ADC];
  logic running; logic [N_CH-1:0] ch_done;
  qubit_controller dut (.clk, .rst_n, .h_wr, .h_rd, .h_addr, .h_wdata, .h_rdata, .h_rvalid,
    .sync_trig(1'b0), .link_in(2'd0), .link_out, .dac_i, .dac_q, .ro_dac_i(rdi), .ro_dac_q(rdq),
    .adc, .running, .ch_done);

  task automatic hw(logic [31:0] a, logic [31:0] d);
    @(negedge clk); h_wr = 1; h_addr = a; h_wdata = d; @(negedge clk); h_wr = 0;
  endtask
  task automatic hr(logic [31:0] a, output logic [31:0] d);
    @(negedge clk); h_rd = 1; h_addr = a; @(negedge clk); h_rd = 0; d = h_rdata;
  endtask
  function automatic logic [31:0] reg_a(int ch, int r); return {22'd0, 5'(ch), 5'(r)}; endfunction
  function automatic instr_t mk(opcode_e op, bit on, int dur, logic [31:0] p0, cond_e c = COND_ALWAYS, int cb = 0);
    instr_t i; i = '0; i.op = op; i.on = on; i.dur = DUR_W'(dur); i.p0 = p0; i.cond = c; i.cond_bit = 5'(cb);
    return i;
  endfunction
  task automatic load(int ch, instr_t p [$]);
    foreach (p[k]) for (int l = 0; l < 4; l++) hw({4'h1, 6'(ch), 20'(k), 2'(l)}, p[k][l*32 +: 32]);
    hw(reg_a(ch, 10), p.size());
  endtask

  int first_on [N_CH], n_on [N_CH], n_cond_on;
  bit blip_seen;
  always @(negedge clk) begin
    if (dut.u_ro.unit_busy[0]) adc[0] = (dut.u_ro.g_unit[0].u_ru.cnt == 5) ? 16'sd12000 : 16'sd300;
    else adc[0] = 16'sd0;
    adc[1] = 16'sd0;
  end

  initial begin
    instr_t p [$]; logic [31:0] d; int cyc;
    adc[0] = 0; adc[1] = 0;
    repeat (3) @(posedge clk); @(negedge clk) rst_n = 1;
    for (int c = 0; c < N_CH; c++) begin
      p = {};
      if (c % 2 == 0) p.push_back(mk(OP_STF, 0, 1, 32'((c + 1) << 24)));
      else            p.push_back(mk(OP_WAIT, 0, 1, 0));
      p.push_back(mk(OP_STA, 1, 20, 32'(1000 * (c + 1))));
      p.push_back(mk(OP_WAIT, 0, 10, 0));
      if (c == 0) begin
        p.push_back(mk(OP_RDO, 0, 16, {9'd0, 1'b0, 1'b0, 5'd3, 16'sd6000}));
        p.push_back(mk(OP_WAIT, 0, 3, 0));
        p.push_back(mk(OP_STA, 1, 7, 32'd20000, COND_IF_ONE, 3));
        p.push_back(mk(OP_STA, 1, 9, 32'd20000, COND_IF_ZERO, 3));
      end
      load(c, p);
      if (c % 2 == 1) hw(reg_a(c, 0), 1);
    end
    foreach (first_on[c]) begin first_on[c] = -1; n_on[c] = 0; end
    n_cond_on = 0;
    hw(reg_a(31, 0), 1);
    for (cyc = 0; cyc < 200; cyc++) begin
      @(negedge clk);
      for (int c = 0; c < N_CH; c++) begin
        if (dac_i[c] != 0 || dac_q[c] != 0) begin
          if (first_on[c] < 0) first_on[c] = cyc;
          if (cyc < first_on[0] + 25 || c != 0) n_on[c]++; else n_cond_on++;
          if (c % 2 == 1) chk(int'(dac_i[c]) == 1000 * (c + 1) && dac_q[c] == 0, $sformatf("ch%0d DC level %0d", c, dac_i[c]));
          else begin
            real m, e; m = $sqrt(real'(dac_i[c]) ** 2 + real'(dac_q[c]) ** 2);
            e = (c == 0 && cyc >= first_on[0] + 25) ? 20000.0 : 1000.0 * (c + 1);
            chk(m > e * 0.995 - 3.0 && m < e * 1.005 + 3.0, $sformatf("ch%0d RF magnitude %f expected %f", c, m, e));
          end
        end
      end
    end
    for (int c = 0; c < N_CH; c++) begin
      chk(first_on[c] == first_on[0] && first_on[0] > 0, $sformatf("ch%0d starts at %0d, ch0 at %0d", c, first_on[c], first_on[0]));
      chk(n_on[c] == 20, $sformatf("ch%0d on for %0d cycles", c, n_on[c]));
    end
    chk(n_cond_on == 7, $sformatf("conditional pulse on for %0d cycles, expected 7 (outcome 1)", n_cond_on));
    chk(!running && ch_done == '1, "all channels done");
    hr(32'h3000_0000, d); chk(d == 32'h8, $sformatf("measurement register %h", d));
    hr(32'h5000_0000, d); chk(d == 16, "16 raw samples");
    finish();
  end
endmodule
