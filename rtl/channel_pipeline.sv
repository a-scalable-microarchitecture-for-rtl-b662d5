// channel_pipeline: one complete control channel, from instructions to DAC samples.
//
// exec_core -> RF controller (DDS) or DC controller -> gain control ->
// quadrature correction -> DC offset correction -> skew delay -> predistortion
// FIR -> DAC. The order of the first six stages is that of the published block
// diagram; the FIR sits in the slot the diagram leaves after the delay stage.
// cfg.dc_mode selects the RF or the DC/arbitrary path; both have the same
// latency. The envelope sample index goes out on env_addr to the shared envelope
// memories, whose samples come back one cycle later on env_s; envelope 0 is flat.
// Timing: a pulse parameter change in cycle t reaches dac_i/dac_q in cycle
// t + 8 + cfg.skew (3 controller stages, gain, correction, offset, delay, FIR).
module channel_pipeline
  import qc_pkg::*;
#(
  parameter int IMEM_DEPTH = 1024,
  localparam int IMEM_AW = $clog2(IMEM_DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic               stop,
  input  ch_cfg_t            cfg,
  input  logic               imem_wr,
  input  logic [IMEM_AW-1:0] imem_addr,
  input  logic [1:0]         imem_lane,
  input  logic [31:0]        imem_data,
  input  logic [MEAS_W-1:0]  meas,
  input  logic               sync_trig,
  output logic [ENV_AW-1:0]  env_addr,
  input  sample_t            env_s [N_ENV],
  output sample_t            dac_i,
  output sample_t            dac_q,
  output rdo_req_t           rdo,
  output logic               busy,
  output logic               done,
  output logic               ev_issue,
  output opcode_e            ev_op,
  output logic               ev_cond_skip,
  output logic               ev_sync_wait
);
  logic               rd_en;
  logic [IMEM_AW-1:0] rd_addr;
  logic [INSTR_W-1:0] rd_data;
  pulse_t             pulse;
  logic [3:0]         env_d;
  sample_t            env_sel;
  sample_t rf_i, rf_q, dc_i, dc_q, s_i, s_q, g_i, g_q, c_i, c_q, o_i, o_q, d_i, d_q;

  instr_mem #(.DEPTH(IMEM_DEPTH)) u_imem (
    .clk, .wr_en(imem_wr), .wr_addr(imem_addr), .wr_lane(imem_lane), .wr_data(imem_data),
    .rd_en, .rd_addr, .rd_data
  );

  exec_core #(.IMEM_AW(IMEM_AW)) u_core (
    .clk, .rst_n, .start, .stop, .prog_len(IMEM_AW'(cfg.prog_len)),
    .imem_rd_en(rd_en), .imem_rd_addr(rd_addr), .imem_rd_data(rd_data),
    .meas, .sync_trig, .pulse_o(pulse), .rdo_o(rdo), .busy, .done,
    .ev_issue, .ev_op, .ev_cond_skip, .ev_sync_wait
  );

  assign env_addr = pulse.env_idx;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) env_d <= '0;
    else        env_d <= pulse.env;
  end
  always_comb begin
    env_sel = 16'sh7FFF;
    for (int e = 0; e < N_ENV; e++)
      if (int'(env_d) == e + 1) env_sel = env_s[e];
  end

  rf_controller u_rf (.clk, .rst_n, .nco_clear(start), .pulse_i(pulse), .env_s(env_sel),
                      .i_o(rf_i), .q_o(rf_q));
  dc_controller u_dc (.clk, .rst_n, .pulse_i(pulse), .env_s(env_sel), .slew(cfg.slew),
                      .i_o(dc_i), .q_o(dc_q));

  assign s_i = cfg.dc_mode ? dc_i : rf_i;
  assign s_q = cfg.dc_mode ? dc_q : rf_q;

  gain_control    u_gain (.clk, .rst_n, .gain(cfg.gain), .i_i(s_i), .q_i(s_q), .i_o(g_i), .q_o(g_q));
  quad_correction u_qmc  (.clk, .rst_n, .a11(cfg.a11), .a12(cfg.a12), .a21(cfg.a21), .a22(cfg.a22),
                          .i_i(g_i), .q_i(g_q), .i_o(c_i), .q_o(c_q));
  dc_correction   u_dcc  (.clk, .rst_n, .off_i(cfg.off_i), .off_q(cfg.off_q),
                          .i_i(c_i), .q_i(c_q), .i_o(o_i), .q_o(o_q));
  skew_delay #(.DW(SKEW_W)) u_skew (.clk, .rst_n, .delay(cfg.skew), .i_i(o_i), .q_i(o_q),
                          .i_o(d_i), .q_o(d_q));
  predistortion_fir #(.TAPS(FIR_TAPS)) u_fir (.clk, .rst_n, .coef(cfg.fir), .i_i(d_i), .q_i(d_q),
                          .i_o(dac_i), .q_o(dac_q));
endmodule
