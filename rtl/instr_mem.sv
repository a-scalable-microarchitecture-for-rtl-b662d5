// instr_mem: the instruction store of one channel.
//
// A simple dual-port memory: the host writes 32-bit lanes of the 128-bit
// instruction words (lane 0 holds bits 31:0), the channel's execution core reads
// whole words. The read is synchronous: rd_data holds mem[rd_addr] from the clock
// edge after rd_en. The published design names per-channel instruction memories
// fed from DRAM; keeping the whole program on chip, the depth and the lane-wise
// write port are this design's choices.
module instr_mem #(
  parameter int DEPTH = 1024,
  parameter int W     = 128,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [1:0]    wr_lane,
  input  logic [31:0]   wr_data,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic [W-1:0]  rd_data
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr][wr_lane*32 +: 32] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
