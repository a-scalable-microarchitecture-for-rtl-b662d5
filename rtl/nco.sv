// nco: numerically controlled oscillator giving a quadrature pair.
//
// A phase accumulator advances by the tuning word `freq` every cycle (output
// frequency = freq / 2^ACC_W x clock rate). The phase offset `phase` (a full turn
// is 2^16) is added to the accumulator, and the top LUT_AW bits of the sum address
// a one-period sine table of 2^LUT_AW entries; the cosine is read a quarter period
// ahead. Changing `freq` does not disturb the accumulator, so frequency changes
// are phase-continuous. `clear` sets the accumulator to zero, giving all NCOs
// cleared together a common phase reference.
// Timing: cos_o/sin_o are registered; they reflect the accumulator and the phase
// offset of the previous cycle. Amplitudes are Q1.15 (peak 32767).
// The published design specifies an NCO for frequency, a phase offset relative to
// the reference NCO phase, and phase-coherent frequency switching; the table
// method and all widths are this design's choices.
module nco #(
  parameter int ACC_W  = 32,
  parameter int LUT_AW = 10
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic [ACC_W-1:0]         freq,
  input  logic [15:0]              phase,
  output logic signed [15:0]       cos_o,
  output logic signed [15:0]       sin_o
);
  localparam int N = 1 << LUT_AW;
  logic signed [15:0] lut [N];

  // sin(2*pi*i/N) scaled to 32767
  initial begin
    for (int i = 0; i < N; i++)
      lut[i] = 16'($rtoi($sin(2.0 * 3.14159265358979 * real'(i) / real'(N)) * 32767.0));
  end

  logic [ACC_W-1:0]  acc;
  logic [ACC_W-1:0]  ph;
  logic [LUT_AW-1:0] idx_s, idx_c;

  assign ph    = acc + {phase, {(ACC_W-16){1'b0}}};
  assign idx_s = ph[ACC_W-1 -: LUT_AW];
  assign idx_c = idx_s + LUT_AW'(N / 4);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0; cos_o <= '0; sin_o <= '0;
    end else begin
      acc   <= clear ? '0 : acc + freq;
      sin_o <= lut[idx_s];
      cos_o <= lut[idx_c];
    end
  end
endmodule
