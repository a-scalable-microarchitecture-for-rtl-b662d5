// rf_controller: direct digital synthesis of one RF channel.
//
// Forms I = A * e(t) * cos(theta + phi) and Q = A * e(t) * sin(theta + phi), where
// A is the amplitude set by STA/STAP, e(t) the envelope sample, theta the NCO
// phase (set by STF) and phi the STP/STAP phase offset. While the core has the
// channel off the outputs are zero, but the NCO keeps running so that phase stays
// coherent across pulses. `nco_clear` (the start of execution) resets the NCO
// phase so that every channel shares one phase reference.
// Timing: pulse_i in cycle t, env_s (the envelope sample chosen by pulse_i.env
// and pulse_i.env_idx) in cycle t+1, i_o/q_o in cycle t+3. All values Q1.15.
// The product structure follows the published DDS description; the pipeline
// depth and rounding (arithmetic shift) are this design's choices.
module rf_controller
  import qc_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    nco_clear,
  input  pulse_t  pulse_i,
  input  sample_t env_s,
  output sample_t i_o,
  output sample_t q_o
);
  sample_t cos_w, sin_w, cos_d, sin_d;
  logic    act1, act2;
  logic signed [15:0] amp1;
  logic signed [31:0] ae_full;
  logic signed [15:0] ae2;
  logic signed [31:0] pi_full, pq_full;

  nco u_nco (
    .clk, .rst_n, .clear(nco_clear), .freq(pulse_i.freq), .phase(pulse_i.phase),
    .cos_o(cos_w), .sin_o(sin_w)
  );

  assign ae_full = amp1 * env_s;
  assign pi_full = ae2 * cos_d;
  assign pq_full = ae2 * sin_d;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act1 <= 1'b0; act2 <= 1'b0; amp1 <= '0; ae2 <= '0; cos_d <= '0; sin_d <= '0;
      i_o <= '0; q_o <= '0;
    end else begin
      act1  <= pulse_i.active;
      amp1  <= pulse_i.amp;
      act2  <= act1;
      ae2   <= 16'(ae_full >>> 15);
      cos_d <= cos_w;
      sin_d <= sin_w;
      i_o   <= act2 ? 16'(pi_full >>> 15) : '0;
      q_o   <= act2 ? 16'(pq_full >>> 15) : '0;
    end
  end
endmodule
