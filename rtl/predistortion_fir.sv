// predistortion_fir: configurable FIR filter applied to I and Q of one channel.
//
// y[n] = sat( sum_k c[k] * x[n-k] / 2^14 ), k = 0 .. TAPS-1, with Q2.14 taps held
// in the control registers. Loaded with the inverse of a measured path response it
// predistorts the signal; it can also serve as a general filter. c[0] = 16384 and
// the rest 0 pass the signal unchanged. Direct form with a tap delay line; one
// register stage at the output, so latency is one cycle. The published design
// states a predistortion block with a configurable digital filter on each channel;
// the FIR form and the tap count are this design's choices.
module predistortion_fir
  import qc_pkg::*;
#(
  parameter int TAPS = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  coef_t [TAPS-1:0]   coef,
  input  sample_t            i_i,
  input  sample_t            q_i,
  output sample_t            i_o,
  output sample_t            q_o
);
  sample_t xi [TAPS];   // xi[0] is the current input
  sample_t xq [TAPS];
  logic signed [47:0] acc_i, acc_q;

  always_comb begin
    xi[0] = i_i;
    xq[0] = q_i;
  end

  always_comb begin
    acc_i = '0;
    acc_q = '0;
    for (int k = 0; k < TAPS; k++) begin
      acc_i += 48'(xi[k] * coef[k]);
      acc_q += 48'(xq[k] * coef[k]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      i_o <= '0; q_o <= '0;
      for (int k = 1; k < TAPS; k++) begin xi[k] <= '0; xq[k] <= '0; end
    end else begin
      for (int k = 1; k < TAPS; k++) begin xi[k] <= xi[k-1]; xq[k] <= xq[k-1]; end
      i_o <= sat16(acc_i >>> 14);
      q_o <= sat16(acc_q >>> 14);
    end
  end
endmodule
