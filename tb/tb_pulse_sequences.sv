// tb_pulse_sequences: the single-qubit calibration sequences used to
// characterise a spin qubit (Rabi, Ramsey, Hahn echo, AllXY), run through the
// whole controller and judged by a simulated qubit.
//
// Channel 0 is the microwave (RF) drive and channel 1 a DC gate that holds a
// load level, then the manipulation level 0, then a readout level; every shot is
// load -> microwave pulses -> readout, as in the standard spin-qubit sequence.
// The testbench's qubit is an ideal spin on resonance with the NCO: each RF
// output sample rotates its Bloch vector about the axis given by the sample's
// phase in the frame that rotates with the NCO frequency, by an angle
// proportional to its amplitude (a pi rotation is 32 cycles at amplitude 0.5).
// During the readout window a charge-sensor model puts a blip on ADC 0 if the
// spin ends nearer |1>, and the controller's charge-sensing discrimination must
// then write 1 to measurement bit 0.
//
// Checks, per shot: the measurement bit equals the ideal outcome of the
// sequence; the carrier phase of every microwave sample matches one free-running
// oscillator plus the pulse's programmed phase (phase coherence across Ramsey and
// echo delays, 90-degree axes for y pulses); the oscillator's phase at the first
// pulse is the same in every shot; each pulse lasts exactly its programmed
// cycles and the first pulse starts on the very cycle the DC gate leaves the
// load level. At the end the statistics counters must hold the number of
// shots and of 1 outcomes.
module tb_pulse_sequences;
  import qc_pkg::*;
  localparam int NC = 2;
  localparam logic [31:0] F = 32'h0300_0000;        // NCO tuning word: period 85.33 cycles
  localparam int NPI = 32;                           // cycles of a pi pulse at amplitude A
  localparam int A = 16384;                          // 0.5 in Q1.15
  localparam int LOADLEN = 40, G2 = 24, WIN = 16;
  localparam real PI = 3.14159265358979;
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
  initial begin repeat (60000) @(posedge clk); failures++; $display("watchdog expired"); finish(); end

  logic h_wr = 0, h_rd = 0, h_rvalid; logic [31:0] h_addr = 0, h_wdata = 0, h_rdata;
  logic [1:0] link_out; sample_t dac_i [NC], dac_q [NC], rdi [N_ADC], rdq [N_ADC], adc [N_ADC];
  logic running; logic [NC-1:0] ch_done;
  qubit_controller #(.NCH(NC), .IMEM_DEPTH(64), .DIG_DEPTH(256)) dut (
    .clk, .rst_n, .h_wr, .h_rd, .h_addr, .h_wdata, .h_rdata, .h_rvalid,
    .sync_trig(1'b0), .link_in(2'd0), .link_out, .dac_i, .dac_q, .ro_dac_i(rdi), .ro_dac_q(rdq),
    .adc, .running, .ch_done);

  task automatic hw(logic [31:0] a, logic [31:0] d);
    @(negedge clk); h_wr = 1; h_addr = a; h_wdata = d; @(negedge clk); h_wr = 0;
  endtask
  task automatic hr(logic [31:0] a, output logic [31:0] d);
    @(negedge clk); h_rd = 1; h_addr = a; @(negedge clk); h_rd = 0; d = h_rdata;
  endtask
  function automatic logic [31:0] reg_a(int ch, int r); return {22'd0, 5'(ch), 5'(r)}; endfunction
  function automatic instr_t mk(opcode_e op, bit on, int dur, logic [31:0] p0);
    instr_t i; i = '0; i.op = op; i.on = on; i.dur = DUR_W'(dur); i.p0 = p0;
    return i;
  endfunction
  task automatic load(int ch, instr_t p [$]);
    foreach (p[k]) for (int l = 0; l < 4; l++) hw({4'h1, 6'(ch), 20'(k), 2'(l)}, p[k][l*32 +: 32]);
    hw(reg_a(ch, 10), p.size());
  endtask

  // One segment of a sequence: a microwave pulse of `cycles` about the axis
  // `quarter` (quarter turns: 0 = x, 1 = y, 2 = -x), or, with on = 0, a delay.
  typedef struct { int cycles; int quarter; bit on; } seg_t;

  // ---------------- simulated qubit ----------------
  real bx, by, bz;              // Bloch vector
  real phi0;  bit phi0_set;     // oscillator phase at the first microwave sample
  int  cyc;                     // cycles since the start command
  bit  capture;                 // qubit and waveform monitor active
  int  sch_off [$], sch_len [$], sch_q [$]; bit sch_on [$];   // programmed schedule
  int  t_first, n_on_seen, dc_load_end;
  sample_t dc_prev;

  function automatic real wrap(real a);
    while (a > PI) a -= 2.0 * PI;
    while (a < -PI) a += 2.0 * PI;
    return a;
  endfunction

  always @(negedge clk) begin
    cyc++;
    if (capture) begin
      // DC gate: note the cycle it leaves the load level
      if (dc_prev == 16'sd8000 && dac_i[1] != 16'sd8000) dc_load_end = cyc;
      dc_prev = dac_i[1];
      if (dac_i[0] != 0 || dac_q[0] != 0) begin
        real m, ph, rel, th, nx, ny, c, s, dot, cx, cy, cz;
        m  = $sqrt(real'(dac_i[0]) ** 2 + real'(dac_q[0]) ** 2);
        ph = $atan2(real'(dac_q[0]), real'(dac_i[0]));
        if (!phi0_set) begin
          phi0 = wrap(ph - 2.0 * PI * real'(F) / 4294967296.0 * real'(cyc) - real'(sch_q[0]) * PI / 2.0);
          phi0_set = 1;
        end
        rel = wrap(ph - 2.0 * PI * real'(F) / 4294967296.0 * real'(cyc) - phi0);
        // which programmed segment this cycle belongs to, counted from the first pulse
        if (t_first < 0) t_first = cyc;
        n_on_seen++;
        begin
          int off, seg;
          off = cyc - t_first; seg = -1;
          foreach (sch_off[i]) if (off >= sch_off[i] && off < sch_off[i] + sch_len[i]) seg = i;
          if (seg < 0 || !sch_on[seg]) begin
            chk(1'b0, $sformatf("output at cycle %0d (offset %0d) outside every programmed pulse", cyc, off));
          end else begin
            real e; e = wrap(rel - real'(sch_q[seg]) * PI / 2.0);
            chk(e < 0.015 && e > -0.015, $sformatf("segment %0d carrier phase off by %f rad at cycle %0d", seg, e, cyc));
          end
        end
        // rotate the Bloch vector about (cos rel, sin rel, 0) by th (Rodrigues)
        th = m / real'(A) * PI / real'(NPI);
        nx = $cos(rel); ny = $sin(rel); c = $cos(th); s = $sin(th);
        dot = nx * bx + ny * by;
        cx = ny * bz; cy = -nx * bz; cz = nx * by - ny * bx;   // n x b
        bx = bx * c + cx * s + nx * dot * (1.0 - c);
        by = by * c + cy * s + ny * dot * (1.0 - c);
        bz = bz * c + cz * s;
      end
    end
    // charge sensor: a tunnelling blip during the readout window if the spin is up
    if (dut.u_ro.unit_busy[0])
      adc[0] = (bz < 0.0 && dut.u_ro.g_unit[0].u_ru.cnt == 5) ? 16'sd12000 : 16'sd300;
    else adc[0] = 16'sd0;
    adc[1] = 16'sd0;
  end

  int shots = 0, ones = 0;
  real first_phi0; bit first_phi0_set = 0;

  // Run one shot: pulses `seq` (each either a pulse of `cycles` at axis
  // `quarter`, or an idle when on = 0), then read out, and compare with `expect1`.
  task automatic shot(string name, seg_t seq [$], bit expect1);
    instr_t p0 [$], p1 [$]; int manip = 0, n_pulse_cyc = 0; logic [31:0] d; int k;
    p0.push_back(mk(OP_STF, 0, 1, F));
    p0.push_back(mk(OP_WAIT, 0, LOADLEN, 0));
    sch_off = {}; sch_len = {}; sch_q = {}; sch_on = {};
    foreach (seq[i]) begin
      if (seq[i].on) p0.push_back(mk(OP_STAP, 1, seq[i].cycles, {16'(seq[i].quarter * 16384), 16'(A)}));
      else           p0.push_back(mk(OP_WAIT, 0, seq[i].cycles, 0));
      sch_off.push_back(manip); sch_len.push_back(seq[i].cycles);
      sch_q.push_back(seq[i].quarter); sch_on.push_back(seq[i].on);
      manip += seq[i].cycles;
      if (seq[i].on) n_pulse_cyc += seq[i].cycles;
    end
    p0.push_back(mk(OP_WAIT, 0, G2, 0));
    p0.push_back(mk(OP_RDO, 0, WIN, {9'd0, 1'b0, 1'b0, 5'd0, 16'sd6000}));
    p0.push_back(mk(OP_WAIT, 0, 4, 0));
    p1.push_back(mk(OP_STA, 1, 1 + LOADLEN, 32'd8000));     // load level
    p1.push_back(mk(OP_STA, 0, manip, 32'd0));              // manipulation level
    p1.push_back(mk(OP_STA, 1, G2 + WIN + 4, 32'd12000));   // readout level
    load(0, p0); load(1, p1);
    bx = 0.0; by = 0.0; bz = 1.0; phi0_set = 0; t_first = -1; n_on_seen = 0;
    dc_load_end = -1; dc_prev = 0;
    cyc = 0; capture = 1;
    hw(reg_a(31, 0), 1);
    k = 0;
    do begin @(negedge clk); k++; end while ((running || k < 10) && k < 5000);
    repeat (20) @(negedge clk);
    capture = 0;
    hr(32'h3000_0000, d);
    chk(d[0] == expect1, $sformatf("%s: outcome %0d, ideal %0d (Bloch z %f)", name, d[0], expect1, bz));
    shots++; ones += int'(expect1);
    // pulse timing: as many output cycles as programmed pulse cycles (each one
    // inside its pulse, checked above), the first on the cycle the gate leaves
    // the load level
    chk(n_on_seen == n_pulse_cyc, $sformatf("%s: %0d output cycles, %0d programmed", name, n_on_seen, n_pulse_cyc));
    if (t_first >= 0) begin
      chk(t_first == dc_load_end, $sformatf("%s: first pulse at %0d, gate left load level at %0d", name, t_first, dc_load_end));
      if (!first_phi0_set) begin first_phi0 = phi0; first_phi0_set = 1; end
      else chk(wrap(phi0 - first_phi0) < 0.015 && wrap(phi0 - first_phi0) > -0.015,
               $sformatf("%s: oscillator phase %f differs from first shot %f", name, phi0, first_phi0));
    end
  endtask

  function automatic seg_t P(int quarter_turn_angle, int axis);   // rotation by angle*pi/2
    seg_t s; s.cycles = quarter_turn_angle * NPI / 2; s.quarter = axis; s.on = 1; return s;
  endfunction
  function automatic seg_t D(int n);
    seg_t s; s.cycles = n; s.quarter = 0; s.on = 0; return s;
  endfunction

  int n_rabi = 0, n_ramsey = 0, n_echo = 0, n_allxy = 0;
  initial begin
    repeat (3) @(posedge clk); @(negedge clk) rst_n = 1;
    adc[0] = 0; adc[1] = 0;
    hw(reg_a(1, 0), 1);                 // channel 1 on the DC path
    // Rabi: pulse lengths for pi, 2pi and 3pi rotations
    shot("Rabi pi",  {P(2, 0)}, 1'b1); n_rabi++;
    shot("Rabi 2pi", {P(4, 0)}, 1'b0); n_rabi++;
    shot("Rabi 3pi", {P(6, 0)}, 1'b1); n_rabi++;
    // Ramsey: x - tau - x is a pi rotation on resonance; x - tau - (-x) returns to |0>
    shot("Ramsey tau=37",   {P(1, 0), D(37),  P(1, 0)}, 1'b1); n_ramsey++;
    shot("Ramsey tau=301",  {P(1, 0), D(301), P(1, 0)}, 1'b1); n_ramsey++;
    shot("Ramsey -x tau=301", {P(1, 0), D(301), P(1, 2)}, 1'b0); n_ramsey++;
    // Hahn echo: x - tau/2 - X - tau/2 - x is 2pi about x
    shot("Echo tau=400", {P(1, 0), D(200), P(2, 0), D(200), P(1, 0)}, 1'b0); n_echo++;
    shot("Echo y-refocus tau=250", {P(1, 0), D(125), P(2, 1), D(125), P(1, 0)}, 1'b1); n_echo++;
    // AllXY: pairs that end in |0> (II XX YY XY YX) or |1> (XI YI xx yy)
    shot("AllXY II", {D(NPI), D(NPI)}, 1'b0); n_allxy++;
    shot("AllXY XX", {P(2, 0), P(2, 0)}, 1'b0); n_allxy++;
    shot("AllXY YY", {P(2, 1), P(2, 1)}, 1'b0); n_allxy++;
    shot("AllXY XY", {P(2, 0), P(2, 1)}, 1'b0); n_allxy++;
    shot("AllXY YX", {P(2, 1), P(2, 0)}, 1'b0); n_allxy++;
    shot("AllXY XI", {P(2, 0), D(NPI)}, 1'b1); n_allxy++;
    shot("AllXY YI", {P(2, 1), D(NPI)}, 1'b1); n_allxy++;
    shot("AllXY xx", {P(1, 0), P(1, 0)}, 1'b1); n_allxy++;
    shot("AllXY yy", {P(1, 1), P(1, 1)}, 1'b1); n_allxy++;
    begin
      logic [31:0] d;
      hr(32'h3000_0100, d); chk(d == shots, $sformatf("shot counter %0d, expected %0d", d, shots));
      hr(32'h3000_0200, d); chk(d == ones, $sformatf("ones counter %0d, expected %0d", d, ones));
    end
    $display("sequences: rabi=%0d ramsey=%0d echo=%0d allxy=%0d", n_rabi, n_ramsey, n_echo, n_allxy);
    finish();
  end
endmodule
