// host_interconnect: decodes the host's word accesses onto the controller's
// memories and registers.
//
// The host side is a simple word bus: one access per cycle, h_wr or h_rd with a
// 32-bit word address; read data returns on h_rdata with h_rvalid one cycle
// after h_rd. Word address map (bits 31:28 select the region):
//   0x0  control registers              [9:0] register address
//   0x1  instruction memories  (write)  [27:22] channel, [21:2] word, [1:0] lane
//   0x2  envelope memories     (write)  [17:16] memory (0..N_ENV-1), [15:0] sample
//   0x3  measurement           (read)   [9:8] 0 register, 1 shots, 2 ones; [4:0] bit
//   0x4  digitizer memories    (read)   [20] unit, [19:0] sample
//   0x5  digitizer fill count  (read)   [0] unit
// In the published system this role is played by the DMA engine and the
// interconnection fabric behind the PCIe link; this plain bus and the map are
// this design's own.
module host_interconnect
  import qc_pkg::*;
#(
  parameter int NCH     = N_CH,
  parameter int IMEM_AW = 10,
  parameter int DIG_AW  = 12
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               h_wr,
  input  logic               h_rd,
  input  logic [31:0]        h_addr,
  input  logic [31:0]        h_wdata,
  output logic [31:0]        h_rdata,
  output logic               h_rvalid,
  // control registers
  output logic               ctrl_wr,
  output logic               ctrl_rd,
  output logic [9:0]         ctrl_addr,
  input  logic [31:0]        ctrl_rdata,
  // instruction memories
  output logic [NCH-1:0]     imem_wr,
  output logic [IMEM_AW-1:0] imem_addr,
  output logic [1:0]         imem_lane,
  // envelope memories
  output logic [N_ENV-1:0]   env_wr,
  output logic [ENV_AW-1:0]  env_addr,
  // measurement register and statistics
  input  logic [MEAS_W-1:0]  meas,
  output logic               stats_rd,
  output logic               stats_sel,
  output logic [4:0]         stats_bit,
  input  logic [31:0]        stats_rdata,
  // digitizer memories
  output logic [N_ADC-1:0]   dig_rd,
  output logic [DIG_AW-1:0]  dig_addr,
  input  sample_t            dig_rdata [N_ADC],
  input  logic [DIG_AW:0]    dig_count [N_ADC],
  output logic [31:0]        wdata
);
  logic [3:0]  region, region_q;
  logic [31:0] direct_q;   // data registered here (measurement register, counts)
  logic        unit_q, use_direct_q;

  assign region    = h_addr[31:28];
  assign wdata     = h_wdata;
  assign ctrl_wr   = h_wr && region == 4'h0;
  assign ctrl_rd   = h_rd && region == 4'h0;
  assign ctrl_addr = h_addr[9:0];
  assign imem_addr = h_addr[2 +: IMEM_AW];
  assign imem_lane = h_addr[1:0];
  assign env_addr  = h_addr[ENV_AW-1:0];
  assign stats_rd  = h_rd && region == 4'h3 && h_addr[9:8] != 2'd0;
  assign stats_sel = h_addr[9:8] == 2'd2;
  assign stats_bit = h_addr[4:0];
  assign dig_addr  = h_addr[DIG_AW-1:0];

  always_comb begin
    for (int c = 0; c < NCH; c++)
      imem_wr[c] = h_wr && region == 4'h1 && int'(h_addr[27:22]) == c;
    for (int e = 0; e < N_ENV; e++)
      env_wr[e] = h_wr && region == 4'h2 && int'(h_addr[17:16]) == e;
    for (int u = 0; u < N_ADC; u++)
      dig_rd[u] = h_rd && region == 4'h4 && int'(h_addr[20]) == u;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      region_q <= '0; direct_q <= '0; unit_q <= 1'b0; use_direct_q <= 1'b0; h_rvalid <= 1'b0;
    end else begin
      h_rvalid <= h_rd;
      if (h_rd) begin
        region_q     <= region;
        unit_q       <= h_addr[20];
        use_direct_q <= (region == 4'h3 && h_addr[9:8] == 2'd0) || region == 4'h5;
        if (region == 4'h5) direct_q <= 32'(dig_count[h_addr[0]]);
        else                direct_q <= 32'(meas);
      end
    end
  end

  always_comb begin
    if (use_direct_q)          h_rdata = direct_q;
    else if (region_q == 4'h0) h_rdata = ctrl_rdata;
    else if (region_q == 4'h3) h_rdata = stats_rdata;
    else if (region_q == 4'h4) h_rdata = 32'(dig_rdata[unit_q]);
    else                       h_rdata = '0;
  end
endmodule
