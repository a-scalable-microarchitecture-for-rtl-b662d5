// meas_stats: measurement averaging unit.
//
// For every measurement register bit it counts the shots (outcomes written) and
// the outcomes equal to 1, so that the host reads an outcome probability
// (ones/shots) after many repetitions instead of every single shot. Counters are
// 32 bits and wrap. Host read: rd_en with rd_sel (0 shots, 1 ones) and rd_bit,
// data on rd_data the next cycle. `clear` zeroes all counters. Automatic
// statistics gathering follows the published design; the counter organisation is
// this design's choice.
module meas_stats
  import qc_pkg::*;
#(
  parameter int NW = N_ADC
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic [NW-1:0] wr_valid,
  input  logic [4:0]    wr_bit [NW],
  input  logic [NW-1:0] wr_val,
  input  logic          rd_en,
  input  logic          rd_sel,
  input  logic [4:0]    rd_bit,
  output logic [31:0]   rd_data
);
  logic [31:0] shots [MEAS_W];
  logic [31:0] ones  [MEAS_W];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < MEAS_W; b++) begin shots[b] <= '0; ones[b] <= '0; end
      rd_data <= '0;
    end else begin
      if (clear) begin
        for (int b = 0; b < MEAS_W; b++) begin shots[b] <= '0; ones[b] <= '0; end
      end else begin
        for (int b = 0; b < MEAS_W; b++) begin
          logic [1:0] ns, no;
          ns = '0; no = '0;
          for (int w = 0; w < NW; w++)
            if (wr_valid[w] && int'(wr_bit[w]) == b) begin
              ns += 1'b1;
              no += {1'b0, wr_val[w]};
            end
          shots[b] <= shots[b] + 32'(ns);
          ones[b]  <= ones[b] + 32'(no);
        end
      end
      if (rd_en) rd_data <= rd_sel ? ones[rd_bit] : shots[rd_bit];
    end
  end
endmodule
