// dc_controller: DC / arbitrary-waveform path of one channel.
//
// The target level is the STA amplitude (envelope 0), or the amplitude times the
// envelope sample for arbitrary shapes played by direct sampling; with the channel
// off the target is zero. The output follows the target either at once (slew = 0:
// square pulses) or by at most `slew` LSBs per cycle, which turns square pulses
// into isosceles trapezoids with equal rise and fall times.
// Timing: pulse_i in cycle t, env_s in t+1, level on i_o from t+3, the same
// latency as rf_controller so that RF and DC channels stay aligned. q_o is zero.
// Level, rise/fall control and direct sampling follow the published design; the
// constant-slope ramp and its per-channel step register are this design's choices.
module dc_controller
  import qc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  pulse_t      pulse_i,
  input  sample_t     env_s,
  input  logic [15:0] slew,
  output sample_t     i_o,
  output sample_t     q_o
);
  logic               act1, flat1;
  logic signed [15:0] amp1;
  logic signed [31:0] ae_full;
  sample_t            tgt2;
  logic signed [17:0] diff, lvl_next;

  assign ae_full = amp1 * env_s;

  always_comb begin
    diff = 18'(tgt2) - 18'(i_o);
    if (slew == 0)                         lvl_next = 18'(tgt2);
    else if (diff > $signed({2'b0, slew}))  lvl_next = 18'(i_o) + $signed({2'b0, slew});
    else if (diff < -$signed({2'b0, slew})) lvl_next = 18'(i_o) - $signed({2'b0, slew});
    else                                   lvl_next = 18'(tgt2);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act1 <= 1'b0; flat1 <= 1'b1; amp1 <= '0; tgt2 <= '0; i_o <= '0;
    end else begin
      act1  <= pulse_i.active;
      flat1 <= (pulse_i.env == 4'd0);
      amp1  <= pulse_i.amp;
      tgt2  <= !act1 ? '0 : (flat1 ? amp1 : 16'(ae_full >>> 15));
      i_o   <= lvl_next[15:0];
    end
  end
  assign q_o = '0;
endmodule
