// skew_delay: digitally controlled delay of one channel (skew correction).
//
// Delays the I/Q sample pair by `delay` extra cycles (0 .. 2^DW - 1) so that
// channels whose external paths differ in latency can be aligned. A circular
// buffer of 2^DW entries is written every cycle and read `delay` entries behind
// the write pointer. Total latency is delay + 1 cycles. Changing `delay` takes
// effect at once (samples may repeat or drop at that moment). The published
// design states a configurable digital delay stage; the whole-cycle resolution
// and the buffer are this design's choices.
module skew_delay
  import qc_pkg::*;
#(
  parameter int DW = 6
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [DW-1:0] delay,
  input  sample_t       i_i,
  input  sample_t       q_i,
  output sample_t       i_o,
  output sample_t       q_o
);
  localparam int D = 1 << DW;
  logic [31:0]   buf_r [D];
  logic [DW-1:0] wp;
  logic [31:0]   rd;

  always_comb begin
    if (delay == 0) rd = {i_i, q_i};
    else            rd = buf_r[wp - delay];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; i_o <= '0; q_o <= '0;
      for (int k = 0; k < D; k++) buf_r[k] <= '0;
    end else begin
      buf_r[wp] <= {i_i, q_i};
      wp        <= wp + 1'b1;
      i_o       <= rd[31:16];
      q_o       <= rd[15:0];
    end
  end
endmodule
