// gain_control: per-channel digital gain on the I/Q sample pair.
//
// i_o = sat(i_i * gain / 2^14), likewise for Q; gain is Q2.14 (16384 = 1.0), so
// the range is -2.0 to +2.0. Results saturate to 16 bits. One register stage:
// outputs follow inputs by one cycle. The published design names this stage; the
// format and the saturation are this design's choices.
module gain_control
  import qc_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  coef_t   gain,
  input  sample_t i_i,
  input  sample_t q_i,
  output sample_t i_o,
  output sample_t q_o
);
  logic signed [31:0] pi, pq;
  assign pi = i_i * gain;
  assign pq = q_i * gain;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      i_o <= '0; q_o <= '0;
    end else begin
      i_o <= sat16(48'(pi >>> 14));
      q_o <= sat16(48'(pq >>> 14));
    end
  end
endmodule
