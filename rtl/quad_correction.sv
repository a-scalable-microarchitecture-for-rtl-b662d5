// quad_correction: quadrature modulation correction (QMC) of one channel.
//
// An external single-sideband modulator with unequal I/Q gains or a quadrature
// phase error leaves an image sideband. Pre-multiplying the I/Q pair by the
// inverse of that error cancels it:
//   i_o = sat((a11*i_i + a12*q_i) / 2^14),  q_o = sat((a21*i_i + a22*q_i) / 2^14)
// with Q2.14 coefficients (identity: a11 = a22 = 16384, a12 = a21 = 0). The LO
// leakage part of the correction is the DC offset stage that follows. One
// register stage. The published design states gain and phase imbalance
// compensation; the general 2x2 matrix form is this design's choice.
module quad_correction
  import qc_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  coef_t   a11, a12, a21, a22,
  input  sample_t i_i,
  input  sample_t q_i,
  output sample_t i_o,
  output sample_t q_o
);
  logic signed [32:0] si, sq;
  assign si = 33'(i_i * a11) + 33'(q_i * a12);
  assign sq = 33'(i_i * a21) + 33'(q_i * a22);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      i_o <= '0; q_o <= '0;
    end else begin
      i_o <= sat16(48'(si >>> 14));
      q_o <= sat16(48'(sq >>> 14));
    end
  end
endmodule
