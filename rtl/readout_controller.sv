// readout_controller: the measurement unit's request routing and readout paths.
//
// Any channel's RDO instruction can trigger a readout. Each request names one of
// the N_ADC readout units; per unit, the lowest-numbered requesting channel wins.
// A request that loses, or that finds its unit busy, is not performed and counted
// in drop_cnt. Results of every unit go to the measurement register (and the
// statistics counters) through res_*; raw samples go to the digitizer memories
// through dig_*. The probe tones of the units drive the readout DACs.
// That RDO triggers a unit measuring into a measurement register follows the
// published design; the arbitration and the drop rule are this design's choices.
module readout_controller
  import qc_pkg::*;
#(
  parameter int NCH = N_CH,
  parameter int NU  = N_ADC
) (
  input  logic               clk,
  input  logic               rst_n,
  input  rdo_req_t           req [NCH],
  input  logic [FREQ_W-1:0]  probe_freq [NU],
  input  logic signed [15:0] probe_amp [NU],
  input  sample_t            adc [NU],
  output sample_t            probe_i [NU],
  output sample_t            probe_q [NU],
  output logic [NU-1:0]      res_valid,
  output logic [NU-1:0]      res_val,
  output logic [4:0]         res_mbit [NU],
  output logic [NU-1:0]      dig_valid,
  output sample_t            dig_data [NU],
  output logic [NU-1:0]      unit_busy,
  output logic [31:0]        drop_cnt
);
  rdo_req_t   sel [NU];
  logic [NU-1:0] drop_u;
  logic [7:0] nreq [NU];
  logic signed [63:0] si [NU], sq [NU];

  always_comb begin
    for (int u = 0; u < NU; u++) begin
      sel[u]  = '0;
      nreq[u] = '0;
      for (int c = NCH - 1; c >= 0; c--) begin
        if (req[c].valid && (int'(req[c].adc) == u)) begin
          sel[u]  = req[c];
          nreq[u] = nreq[u] + 1'b1;
        end
      end
    end
  end

  for (genvar u = 0; u < NU; u++) begin : g_unit
    readout_unit u_ru (
      .clk, .rst_n, .req(sel[u]), .probe_freq(probe_freq[u]), .probe_amp(probe_amp[u]),
      .adc_i(adc[u]), .busy(unit_busy[u]), .req_drop(drop_u[u]),
      .probe_i(probe_i[u]), .probe_q(probe_q[u]), .res_valid(res_valid[u]),
      .res_val(res_val[u]), .res_mbit(res_mbit[u]), .sum_i(si[u]), .sum_q(sq[u]),
      .dig_valid(dig_valid[u]), .dig_data(dig_data[u])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) drop_cnt <= '0;
    else begin
      logic [31:0] d;
      d = '0;
      for (int u = 0; u < NU; u++) begin
        if (nreq[u] != 0) d += (drop_u[u] ? 32'(nreq[u]) : 32'(nreq[u]) - 1);
      end
      drop_cnt <= drop_cnt + d;
    end
  end
endmodule
