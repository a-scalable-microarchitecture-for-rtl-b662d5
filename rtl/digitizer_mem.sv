// digitizer_mem: raw sample memory of one readout channel.
//
// While a measurement window is open (wr_valid) the ADC samples are appended at
// the write pointer, so raw signals can be analysed offline. When DEPTH samples
// are stored, further samples are dropped and `overflow` is set. `clear` resets
// the pointer and the flag. Host read: rd_en/rd_addr, rd_data the next cycle;
// `count` is the number of samples held. Raw recording follows the published
// design, which stores it in DRAM; a bounded on-chip memory and the stop-when-full
// rule are this design's choices.
module digitizer_mem
  import qc_pkg::*;
#(
  parameter int DEPTH = 4096,
  localparam int AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          wr_valid,
  input  sample_t       wr_data,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output sample_t       rd_data,
  output logic [AW:0]   count,
  output logic          overflow
);
  sample_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_valid && !clear && count < (AW+1)'(DEPTH)) mem[count[AW-1:0]] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0; overflow <= 1'b0;
    end else if (clear) begin
      count <= '0; overflow <= 1'b0;
    end else if (wr_valid) begin
      if (count < (AW+1)'(DEPTH)) count <= count + 1'b1;
      else overflow <= 1'b1;
    end
  end
endmodule
