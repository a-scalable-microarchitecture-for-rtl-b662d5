// tb_exec_core: runs a program covering every instruction (pulse synthesis with
// the channel on and off, WAIT on/off, conditional execution taken and skipped,
// SYNC on an external trigger, RDO) followed by random instructions. A reference
// walk of the program in the testbench predicts, cycle by cycle, the pulse
// parameters and the readout requests; the core must match it exactly, start 4
// cycles after `start`, and leave no idle cycle between instructions.
module tb_exec_core;
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
  logic start = 0, stop = 0, sync_trig = 0;
  logic [9:0] prog_len;
  logic wr_en = 0; logic [9:0] wr_addr = 0; logic [1:0] wr_lane = 0; logic [31:0] wr_data = 0;
  logic rd_en; logic [9:0] rd_addr; logic [127:0] rd_data;
  logic [31:0] meas;
  pulse_t pulse_o; rdo_req_t rdo_o; logic busy, done, ev_issue, ev_cond_skip, ev_sync_wait;
  opcode_e ev_op;

  instr_mem u_mem (.clk, .wr_en, .wr_addr, .wr_lane, .wr_data, .rd_en, .rd_addr, .rd_data);
  exec_core dut (.clk, .rst_n, .start, .stop, .prog_len, .imem_rd_en(rd_en), .imem_rd_addr(rd_addr),
                 .imem_rd_data(rd_data), .meas, .sync_trig, .pulse_o, .rdo_o, .busy, .done,
                 .ev_issue, .ev_op, .ev_cond_skip, .ev_sync_wait);

  instr_t prog [$];
  // expected per-cycle values
  bit    e_act [$]; logic [15:0] e_amp [$]; logic [31:0] e_freq [$]; logic [15:0] e_ph [$];
  logic [3:0] e_env [$]; int e_idx [$]; bit e_rdo [$];
  int    n_skip_exp;
  localparam int SYNC_AT = 60;   // cycle (after the first instruction) at which the trigger rises

  function automatic instr_t mk(opcode_e op, bit on, int dur, logic [31:0] p0,
                                cond_e c = COND_ALWAYS, int cb = 0, int env = 0);
    instr_t i; i = '0;
    i.op = op; i.on = on; i.dur = DUR_W'(dur); i.p0 = p0; i.cond = c; i.cond_bit = 5'(cb);
    i.env = 4'(env);
    return i;
  endfunction

  task automatic build_model();
    logic [15:0] amp = 0, ph = 0; logic [31:0] fr = 0;
    int cyc = 0;
    n_skip_exp = 0;
    foreach (prog[k]) begin
      instr_t i; bit ok; int d;
      i = prog[k];
      ok = (i.cond == COND_ALWAYS) || (i.cond == COND_IF_ONE && meas[i.cond_bit]) ||
           (i.cond == COND_IF_ZERO && !meas[i.cond_bit]);
      if (!ok) n_skip_exp++;
      if (ok) case (i.op)
        OP_STA: amp = i.p0[15:0];
        OP_STF: fr = i.p0;
        OP_STP: ph = i.p0[31:16];
        OP_STAP: begin amp = i.p0[15:0]; ph = i.p0[31:16]; end
        default: ;
      endcase
      d = (i.dur == 0) ? 1 : int'(i.dur);
      if (ok && i.op == OP_SYNC) d = (SYNC_AT >= cyc) ? SYNC_AT - cyc + 1 : -1;
      for (int c = 0; c < d; c++) begin
        e_act.push_back(ok && i.on && i.op != OP_SYNC && i.op != OP_RDO);
        e_amp.push_back(amp); e_freq.push_back(fr); e_ph.push_back(ph); e_env.push_back(i.env);
        e_idx.push_back(c > 1023 ? 1023 : c);
        e_rdo.push_back(ok && i.op == OP_RDO && c == 0);
        cyc++;
      end
    end
  endtask

  task automatic load();
    foreach (prog[k])
      for (int l = 0; l < 4; l++) begin
        @(negedge clk); wr_en = 1; wr_addr = 10'(k); wr_lane = 2'(l);
        wr_data = prog[k][l*32 +: 32];
      end
    @(negedge clk) wr_en = 0;
  endtask

  int n_skip, n_sync, n_rdo_seen;
  initial begin
    meas = 32'h0000_0008 | ($urandom & 32'hFFFF_FF00);
    prog.push_back(mk(OP_STF, 0, 2, 32'h0100_0000));
    prog.push_back(mk(OP_STA, 1, 5, 32'd1000, COND_ALWAYS, 0, 1));
    prog.push_back(mk(OP_STP, 1, 1, 32'h4000_0000));
    prog.push_back(mk(OP_STAP, 1, 1, 32'h8000_07D0));
    prog.push_back(mk(OP_WAIT, 1, 1, 0));
    prog.push_back(mk(OP_WAIT, 0, 3, 0));
    prog.push_back(mk(OP_STA, 1, 2, 32'd3000, COND_IF_ONE, 3));
    prog.push_back(mk(OP_STA, 1, 2, 32'd4000, COND_IF_ONE, 4));
    prog.push_back(mk(OP_STA, 1, 0, 32'd5000, COND_IF_ZERO, 4, 2));
    prog.push_back(mk(OP_SYNC, 0, 1, 0));
    prog.push_back(mk(OP_RDO, 0, 10, {9'd0, 1'b1, 1'b1, 5'd7, 16'd123}));
    prog.push_back(mk(OP_WAIT, 1, 3, 0));
    for (int k = 0; k < 40; k++) begin
      opcode_e op; op = opcode_e'($urandom_range(0, 4));
      prog.push_back(mk(op, 1'($urandom), $urandom_range(0, 4), $urandom,
                        cond_e'($urandom_range(0, 2)), $urandom_range(0, 31), $urandom_range(0, 3)));
    end
    prog_len = 10'(prog.size());
    build_model();
    repeat (2) @(posedge clk); @(negedge clk) rst_n = 1;
    load();
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    begin
      int lat = 1;
      while (!ev_issue && lat < 20) begin @(negedge clk); lat++; end
      chk(lat == 4, $sformatf("first instruction %0d cycles after start", lat));
    end
    n_skip = 0; n_sync = 0; n_rdo_seen = 0;
    for (int c = 0; c < e_act.size(); c++) begin
      chk(busy, "busy while running");
      chk(pulse_o.active == e_act[c], $sformatf("c%0d active %0d exp %0d", c, pulse_o.active, e_act[c]));
      if (e_act[c]) begin
        chk(pulse_o.amp == e_amp[c], $sformatf("c%0d amp %0d exp %0d", c, pulse_o.amp, e_amp[c]));
        chk(pulse_o.freq == e_freq[c], $sformatf("c%0d freq", c));
        chk(pulse_o.phase == e_ph[c], $sformatf("c%0d phase", c));
        chk(pulse_o.env == e_env[c] && int'(pulse_o.env_idx) == e_idx[c], $sformatf("c%0d env", c));
      end
      chk(rdo_o.valid == e_rdo[c], $sformatf("c%0d rdo", c));
      if (rdo_o.valid) begin
        n_rdo_seen++;
        chk(rdo_o.thr == 16'sd123 && rdo_o.mbit == 5'd7 && rdo_o.mode && rdo_o.adc && rdo_o.window == 10, "rdo fields");
      end
      if (ev_cond_skip) n_skip++;
      if (ev_sync_wait) n_sync++;
      // trigger rises so that its edge is seen in cycle SYNC_AT
      if (c == SYNC_AT) sync_trig = 1;
      @(negedge clk);
    end
    sync_trig = 0;
    repeat (2) @(negedge clk);
    chk(done && !busy, "done after the last instruction");
    chk(n_skip == n_skip_exp && n_skip >= 1, $sformatf("conditional skips %0d exp %0d", n_skip, n_skip_exp));
    chk(n_sync > 10, "SYNC blocked");
    chk(n_rdo_seen == 1, "one readout request");
    // stop in the middle of a second run
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    repeat (10) @(negedge clk);
    chk(busy, "second run busy");
    stop = 1; @(negedge clk) stop = 0;
    chk(!busy && !pulse_o.active, "stopped");
    // a new run starts from cleared parameters: a first WAIT with the channel on
    // pulses at amplitude, frequency and phase 0, whatever the last run left
    prog = {mk(OP_WAIT, 1, 3, 0)};
    load();
    prog_len = 10'd1;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    repeat (3) @(negedge clk);
    chk(pulse_o.active && pulse_o.amp == 0 && pulse_o.freq == 0 && pulse_o.phase == 0,
        $sformatf("parameters after start: amp %0d freq %h phase %h", pulse_o.amp, pulse_o.freq, pulse_o.phase));
    finish();
  end
endmodule
