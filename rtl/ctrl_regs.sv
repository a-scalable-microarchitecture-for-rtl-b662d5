// ctrl_regs: host-visible control and configuration registers.
//
// 32-bit registers at word address {ch[4:0], reg[4:0]}.
// Per channel (ch = 0 .. NCH-1):
//   0 dc_mode  1 gain  2 a11  3 a12  4 a21  5 a22  6 off_i  7 off_q
//   8 skew     9 slew  10 prog_len      16..16+FIR_TAPS-1 FIR taps
// Global (ch = 31):
//   0 command (write-1 strobes: bit0 start, bit1 stop, bit2 clear measurement
//     register, bit3 clear statistics, bit4 clear digitizer memories);
//     read: bit0 running
//   1 exec_mode  2 link_delay  3/4 readout probe tuning word of unit 0/1
//   5/6 readout probe amplitude of unit 0/1  7 readout requests dropped (read only)
//   8 digitizer overflow flags (read only)
// Reset values give a transparent channel: gain 1.0, identity correction
// matrix, FIR tap 0 = 1.0, no offset, no skew. Reads return data the cycle after
// rd_en. The published design names the control registers; this register map is
// this design's own.
module ctrl_regs
  import qc_pkg::*;
#(
  parameter int NCH = N_CH
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wr_en,
  input  logic        rd_en,
  input  logic [9:0]  addr,
  input  logic [31:0] wdata,
  output logic [31:0] rdata,
  output ch_cfg_t     cfg [NCH],
  output exec_mode_e  exec_mode,
  output logic [15:0] link_delay,
  output logic [FREQ_W-1:0]  ro_freq [N_ADC],
  output logic signed [15:0] ro_amp [N_ADC],
  output logic        cmd_start,
  output logic        cmd_stop,
  output logic        clr_meas,
  output logic        clr_stats,
  output logic        clr_dig,
  input  logic        running,
  input  logic [31:0] drop_cnt,
  input  logic [N_ADC-1:0] dig_overflow
);
  logic [4:0] ch, rg;
  assign ch = addr[9:5];
  assign rg = addr[4:0];

  function automatic ch_cfg_t cfg_default();
    ch_cfg_t c;
    c = '0;
    c.gain = 16'(COEF_ONE);
    c.a11  = 16'(COEF_ONE);
    c.a22  = 16'(COEF_ONE);
    c.fir[0] = 16'(COEF_ONE);
    return c;
  endfunction

  function automatic logic [31:0] cfg_read(input ch_cfg_t c, input logic [4:0] r);
    logic [31:0] v;
    v = '0;
    case (r)
      5'd0:  v = {31'd0, c.dc_mode};
      5'd1:  v = 32'(c.gain);
      5'd2:  v = 32'(c.a11);
      5'd3:  v = 32'(c.a12);
      5'd4:  v = 32'(c.a21);
      5'd5:  v = 32'(c.a22);
      5'd6:  v = 32'(c.off_i);
      5'd7:  v = 32'(c.off_q);
      5'd8:  v = 32'(c.skew);
      5'd9:  v = 32'(c.slew);
      5'd10: v = 32'(c.prog_len);
      default:
        if (r >= 5'd16 && r < 5'(16 + FIR_TAPS)) v = 32'(c.fir[r - 5'd16]);
    endcase
    return v;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NCH; k++) cfg[k] <= cfg_default();
      exec_mode <= MODE_SINGLE; link_delay <= '0;
      for (int u = 0; u < N_ADC; u++) begin ro_freq[u] <= '0; ro_amp[u] <= '0; end
      cmd_start <= 1'b0; cmd_stop <= 1'b0; clr_meas <= 1'b0; clr_stats <= 1'b0;
      clr_dig <= 1'b0; rdata <= '0;
    end else begin
      cmd_start <= 1'b0; cmd_stop <= 1'b0; clr_meas <= 1'b0; clr_stats <= 1'b0;
      clr_dig <= 1'b0;
      if (wr_en) begin
        if (ch == 5'd31) begin
          case (rg)
            5'd0: begin
              cmd_start <= wdata[0]; cmd_stop <= wdata[1]; clr_meas <= wdata[2];
              clr_stats <= wdata[3]; clr_dig <= wdata[4];
            end
            5'd1: exec_mode  <= exec_mode_e'(wdata[1:0]);
            5'd2: link_delay <= wdata[15:0];
            5'd3: ro_freq[0] <= wdata;
            5'd4: ro_freq[1] <= wdata;
            5'd5: ro_amp[0]  <= wdata[15:0];
            5'd6: ro_amp[1]  <= wdata[15:0];
            default: ;
          endcase
        end else if (int'(ch) < NCH) begin
          case (rg)
            5'd0:  cfg[ch].dc_mode  <= wdata[0];
            5'd1:  cfg[ch].gain     <= wdata[15:0];
            5'd2:  cfg[ch].a11      <= wdata[15:0];
            5'd3:  cfg[ch].a12      <= wdata[15:0];
            5'd4:  cfg[ch].a21      <= wdata[15:0];
            5'd5:  cfg[ch].a22      <= wdata[15:0];
            5'd6:  cfg[ch].off_i    <= wdata[15:0];
            5'd7:  cfg[ch].off_q    <= wdata[15:0];
            5'd8:  cfg[ch].skew     <= wdata[SKEW_W-1:0];
            5'd9:  cfg[ch].slew     <= wdata[15:0];
            5'd10: cfg[ch].prog_len <= wdata[9:0];
            default:
              if (rg >= 5'd16 && rg < 5'(16 + FIR_TAPS)) cfg[ch].fir[rg - 5'd16] <= wdata[15:0];
          endcase
        end
      end
      if (rd_en) begin
        if (ch == 5'd31) begin
          case (rg)
            5'd0: rdata <= {31'd0, running};
            5'd1: rdata <= 32'(exec_mode);
            5'd2: rdata <= 32'(link_delay);
            5'd3: rdata <= ro_freq[0];
            5'd4: rdata <= ro_freq[1];
            5'd5: rdata <= 32'(ro_amp[0]);
            5'd6: rdata <= 32'(ro_amp[1]);
            5'd7: rdata <= drop_cnt;
            5'd8: rdata <= 32'(dig_overflow);
            default: rdata <= '0;
          endcase
        end else if (int'(ch) < NCH) rdata <= cfg_read(cfg[ch], rg);
        else rdata <= '0;
      end
    end
  end
endmodule
