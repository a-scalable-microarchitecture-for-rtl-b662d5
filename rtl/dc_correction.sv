// dc_correction: DC offset correction of one channel.
//
// Adds a signed offset to I and to Q (saturating), cancelling the carrier (LO)
// leakage of an external quadrature modulator, or a DC offset of the signal path.
// One register stage. The published design states DC offset correction; the
// saturating adder is this design's choice.
module dc_correction
  import qc_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  sample_t off_i,
  input  sample_t off_q,
  input  sample_t i_i,
  input  sample_t q_i,
  output sample_t i_o,
  output sample_t q_o
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      i_o <= '0; q_o <= '0;
    end else begin
      i_o <= sat16(48'(i_i) + 48'(off_i));
      q_o <= sat16(48'(q_i) + 48'(off_q));
    end
  end
endmodule
