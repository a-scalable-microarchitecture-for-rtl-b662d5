// env_mem: one envelope (pulse shape) memory shared by all channels.
//
// The host writes Q1.15 samples one word at a time; every channel has its own
// synchronous read port (rd_data[k] is mem[rd_addr[k]] from the next clock edge),
// so all channels can play the same shape at once. The published design names
// three envelope memories selected by the instruction's envelope identifier; the
// depth, the sample format and one read port per channel (in an FPGA, one copy of
// the memory per pair of ports) are this design's choices.
module env_mem #(
  parameter int DEPTH = 1024,
  parameter int N_RD  = 22,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic                      clk,
  input  logic                      wr_en,
  input  logic [AW-1:0]             wr_addr,
  input  logic signed [15:0]        wr_data,
  input  logic [N_RD-1:0][AW-1:0]   rd_addr,
  output logic signed [15:0]        rd_data [N_RD]
);
  logic signed [15:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    for (int k = 0; k < N_RD; k++) rd_data[k] <= mem[rd_addr[k]];
  end
endmodule
