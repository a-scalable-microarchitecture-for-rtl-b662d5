// meas_register: the qubit measurement register.
//
// MEAS_W outcome bits. Each readout unit writes one bit when its measurement
// ends (wr_valid/wr_bit/wr_val; a later port wins if two write the same bit in
// one cycle). Execution cores read all bits at once for conditional
// instructions; the host reads them and can clear them. The new value is visible
// the cycle after the write. The register and its use for conditional execution
// follow the published design; its width is this design's choice.
module meas_register
  import qc_pkg::*;
#(
  parameter int NW = N_ADC
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic [NW-1:0]     wr_valid,
  input  logic [4:0]        wr_bit [NW],
  input  logic [NW-1:0]     wr_val,
  output logic [MEAS_W-1:0] meas
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) meas <= '0;
    else if (clear) meas <= '0;
    else begin
      for (int w = 0; w < NW; w++)
        if (wr_valid[w]) meas[wr_bit[w]] <= wr_val[w];
    end
  end
endmodule
