// readout_unit: one ADC readout path of the measurement unit.
//
// A request (an RDO instruction) opens a measurement window of `window` cycles,
// starting the cycle after req.valid. Two discrimination methods:
//  * charge sensing (mode 0): the outcome is 1 if any ADC sample of the window
//    exceeds the threshold, i.e. the sensor signal crossed it;
//  * reflectometry (mode 1): the unit drives a quadrature probe tone (probe_i/q,
//    amplitude probe_amp, tuning word probe_freq) to the readout DAC, mixes every
//    ADC sample with the same tone and accumulates I and Q; the outcome is 1 if
//    the mean demodulated I component, sum(adc*cos)/2^15/window, reaches the
//    threshold (compared without division as sum(adc*cos) >= thr*window*2^15).
// The sums and the threshold product are 64 bits wide, exact for windows up to
// 2^33 cycles (about 43 s at 5 ns); longer windows would overflow them.
// res_valid pulses for one cycle the cycle after the window ends, with res_val,
// res_mbit (the measurement register bit) and the I/Q sums. Every sample of the
// window is also offered on dig_valid/dig_data for raw recording. A request that
// arrives while the unit is busy is refused (req_drop). The two methods, the
// window, the threshold and the probe pulses follow the published design; the
// crossing rule, the projection on I and the ignoring of loop delay are this
// design's choices.
module readout_unit
  import qc_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  rdo_req_t           req,
  input  logic [FREQ_W-1:0]  probe_freq,
  input  logic signed [15:0] probe_amp,
  input  sample_t            adc_i,
  output logic               busy,
  output logic               req_drop,
  output sample_t            probe_i,
  output sample_t            probe_q,
  output logic               res_valid,
  output logic               res_val,
  output logic [4:0]         res_mbit,
  output logic signed [63:0] sum_i,
  output logic signed [63:0] sum_q,
  output logic               dig_valid,
  output sample_t            dig_data
);
  sample_t            cos_w, sin_w;
  logic [DUR_W-1:0]   cnt, win;
  logic               mode, hit;
  logic signed [15:0] thr;
  logic signed [31:0] mi, mq, pi, pq;
  logic signed [63:0] thr_n, sum_i_next;

  nco u_nco (.clk, .rst_n, .clear(!busy), .freq(probe_freq), .phase(16'd0),
             .cos_o(cos_w), .sin_o(sin_w));

  assign mi = adc_i * cos_w;
  assign mq = adc_i * sin_w;
  assign pi = probe_amp * cos_w;
  assign pq = probe_amp * sin_w;
  assign thr_n = 64'(thr) * $signed({20'd0, win}) * 64'sd32768;
  assign sum_i_next = sum_i + 64'(mi);
  assign req_drop = req.valid && busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; cnt <= '0; win <= '0; mode <= 1'b0; hit <= 1'b0; thr <= '0;
      res_mbit <= '0; res_valid <= 1'b0; res_val <= 1'b0; sum_i <= '0; sum_q <= '0;
    end else begin
      res_valid <= 1'b0;
      if (!busy) begin
        if (req.valid) begin
          busy <= 1'b1; cnt <= req.window; win <= req.window; mode <= req.mode;
          thr <= req.thr; res_mbit <= req.mbit; hit <= 1'b0; sum_i <= '0; sum_q <= '0;
        end
      end else begin
        if (adc_i > thr) hit <= 1'b1;
        sum_i <= sum_i_next;
        sum_q <= sum_q + 64'(mq);
        cnt   <= cnt - 1'b1;
        if (cnt == 1) begin
          busy      <= 1'b0;
          res_valid <= 1'b1;
          res_val   <= mode ? (sum_i_next >= thr_n) : (hit || (adc_i > thr));
        end
      end
    end
  end

  assign probe_i   = (busy && mode) ? 16'(pi >>> 15) : '0;
  assign probe_q   = (busy && mode) ? 16'(pq >>> 15) : '0;
  assign dig_valid = busy;
  assign dig_data  = adc_i;
endmodule
