// qubit_controller: top level of the instruction-driven qubit controller.
//
// NCH channels each run their own instruction stream and synthesise their DAC
// samples on the fly (direct digital synthesis) from the pulse parameters the
// instructions set, instead of playing stored waveforms. All channels share one
// clock, are started on the same edge by the execution controller, and share the
// envelope memories, the measurement register and the measurement unit (readout
// units, statistics counters, digitizer memories).
//
// Interfaces:
//  * host word bus h_* (see host_interconnect for the address map); it stands
//    for the PCIe/DMA path of the full system, which is not part of this RTL;
//  * sync_trig: external trigger for SYNC instructions (synchronised here by two
//    flip-flops, so a SYNC sees an edge 2 cycles after it arrives);
//  * link_in/link_out: multi-controller synchronization link (codes of
//    qc_pkg::link_cmd_e);
//  * dac_i/dac_q: one I/Q sample pair per channel per cycle; ro_dac_i/ro_dac_q
//    the readout probe tones; adc the readout ADC samples.
// The block structure follows the published architecture diagram; widths, the
// host bus and the register map are this design's choices (see qc_pkg).
// The channels' event outputs (ev_*) and the readout units' busy flags are
// observation points for testbenches and are deliberately left unconnected here.
module qubit_controller
  import qc_pkg::*;
#(
  parameter int NCH        = N_CH,
  parameter int IMEM_DEPTH = 1024,
  parameter int DIG_DEPTH  = 4096
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        h_wr,
  input  logic        h_rd,
  input  logic [31:0] h_addr,
  input  logic [31:0] h_wdata,
  output logic [31:0] h_rdata,
  output logic        h_rvalid,
  input  logic        sync_trig,
  input  logic [1:0]  link_in,
  output logic [1:0]  link_out,
  output sample_t     dac_i [NCH],
  output sample_t     dac_q [NCH],
  output sample_t     ro_dac_i [N_ADC],
  output sample_t     ro_dac_q [N_ADC],
  input  sample_t     adc [N_ADC],
  output logic        running,
  output logic [NCH-1:0] ch_done
);
  localparam int IMEM_AW = $clog2(IMEM_DEPTH);
  localparam int DIG_AW  = $clog2(DIG_DEPTH);

  // control
  ch_cfg_t            cfg [NCH];
  exec_mode_e         exec_mode;
  logic [15:0]        link_delay;
  logic [FREQ_W-1:0]  ro_freq [N_ADC];
  logic signed [15:0] ro_amp [N_ADC];
  logic cmd_start, cmd_stop, clr_meas, clr_stats, clr_dig, core_start, core_stop;
  link_cmd_e          link_out_e;

  // host bus fan-out
  logic               ctrl_wr, ctrl_rd;
  logic [9:0]         ctrl_addr;
  logic [31:0]        ctrl_rdata, wdata, stats_rdata, drop_cnt;
  logic [NCH-1:0]     imem_wr;
  logic [IMEM_AW-1:0] imem_addr;
  logic [1:0]         imem_lane;
  logic [N_ENV-1:0]   env_wr;
  logic [ENV_AW-1:0]  env_waddr;
  logic               stats_rd, stats_sel;
  logic [4:0]         stats_bit;
  logic [N_ADC-1:0]   dig_rd, dig_ovf;
  logic [DIG_AW-1:0]  dig_addr;
  sample_t            dig_rdata [N_ADC];
  logic [DIG_AW:0]    dig_count [N_ADC];

  // channels
  logic [NCH-1:0][ENV_AW-1:0] env_raddr;
  sample_t            env_rd [N_ENV][NCH];
  rdo_req_t           rdo [NCH];
  logic [NCH-1:0]     busy, done, ev_issue, ev_cond_skip, ev_sync_wait;
  opcode_e            ev_op [NCH];
  logic [MEAS_W-1:0]  meas;
  assign ch_done = done;
  logic [1:0]         trig_sync;

  // measurement unit
  logic [N_ADC-1:0]   res_valid, res_val, dig_valid, unit_busy;
  logic [4:0]         res_mbit [N_ADC];
  sample_t            dig_data [N_ADC];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) trig_sync <= '0;
    else        trig_sync <= {trig_sync[0], sync_trig};
  end

  host_interconnect #(.NCH(NCH), .IMEM_AW(IMEM_AW), .DIG_AW(DIG_AW)) u_ic (
    .clk, .rst_n, .h_wr, .h_rd, .h_addr, .h_wdata, .h_rdata, .h_rvalid,
    .ctrl_wr, .ctrl_rd, .ctrl_addr, .ctrl_rdata, .imem_wr, .imem_addr, .imem_lane,
    .env_wr, .env_addr(env_waddr), .meas, .stats_rd, .stats_sel, .stats_bit, .stats_rdata,
    .dig_rd, .dig_addr, .dig_rdata, .dig_count, .wdata
  );

  ctrl_regs #(.NCH(NCH)) u_regs (
    .clk, .rst_n, .wr_en(ctrl_wr), .rd_en(ctrl_rd), .addr(ctrl_addr), .wdata, .rdata(ctrl_rdata),
    .cfg, .exec_mode, .link_delay, .ro_freq, .ro_amp, .cmd_start, .cmd_stop,
    .clr_meas, .clr_stats, .clr_dig, .running, .drop_cnt, .dig_overflow(dig_ovf)
  );

  exec_controller u_exec (
    .clk, .rst_n, .mode(exec_mode), .link_delay, .host_start(cmd_start), .host_stop(cmd_stop),
    .link_in(link_cmd_e'(link_in)), .cores_busy(|busy), .link_out(link_out_e),
    .core_start, .core_stop, .running
  );
  assign link_out = link_out_e;

  for (genvar e = 0; e < N_ENV; e++) begin : g_env
    env_mem #(.DEPTH(1 << ENV_AW), .N_RD(NCH)) u_env (
      .clk, .wr_en(env_wr[e]), .wr_addr(env_waddr), .wr_data(wdata[15:0]),
      .rd_addr(env_raddr), .rd_data(env_rd[e])
    );
  end

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    sample_t env_s [N_ENV];
    for (genvar e = 0; e < N_ENV; e++) begin : g_e
      assign env_s[e] = env_rd[e][c];
    end
    channel_pipeline #(.IMEM_DEPTH(IMEM_DEPTH)) u_ch (
      .clk, .rst_n, .start(core_start), .stop(core_stop), .cfg(cfg[c]),
      .imem_wr(imem_wr[c]), .imem_addr, .imem_lane, .imem_data(wdata),
      .meas, .sync_trig(trig_sync[1]), .env_addr(env_raddr[c]), .env_s,
      .dac_i(dac_i[c]), .dac_q(dac_q[c]), .rdo(rdo[c]), .busy(busy[c]), .done(done[c]),
      .ev_issue(ev_issue[c]), .ev_op(ev_op[c]), .ev_cond_skip(ev_cond_skip[c]),
      .ev_sync_wait(ev_sync_wait[c])
    );
  end

  readout_controller #(.NCH(NCH), .NU(N_ADC)) u_ro (
    .clk, .rst_n, .req(rdo), .probe_freq(ro_freq), .probe_amp(ro_amp), .adc,
    .probe_i(ro_dac_i), .probe_q(ro_dac_q), .res_valid, .res_val, .res_mbit,
    .dig_valid, .dig_data, .unit_busy, .drop_cnt
  );

  meas_register #(.NW(N_ADC)) u_meas (
    .clk, .rst_n, .clear(clr_meas), .wr_valid(res_valid), .wr_bit(res_mbit), .wr_val(res_val),
    .meas
  );

  meas_stats #(.NW(N_ADC)) u_stats (
    .clk, .rst_n, .clear(clr_stats), .wr_valid(res_valid), .wr_bit(res_mbit), .wr_val(res_val),
    .rd_en(stats_rd), .rd_sel(stats_sel), .rd_bit(stats_bit), .rd_data(stats_rdata)
  );

  for (genvar u = 0; u < N_ADC; u++) begin : g_dig
    digitizer_mem #(.DEPTH(DIG_DEPTH)) u_dig (
      .clk, .rst_n, .clear(clr_dig), .wr_valid(dig_valid[u]), .wr_data(dig_data[u]),
      .rd_en(dig_rd[u]), .rd_addr(dig_addr), .rd_data(dig_rdata[u]), .count(dig_count[u]),
      .overflow(dig_ovf[u])
    );
  end
endmodule
