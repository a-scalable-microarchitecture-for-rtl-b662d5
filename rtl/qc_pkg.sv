// qc_pkg: types and constants shared by the qubit controller.
//
// The controller is a set of instruction-driven channels. Each instruction is a
// 128-bit word; its opcode names one of the seven instructions of the controller's
// ISA (STA, STF, STP, STAP, WAIT, SYNC, RDO). The mnemonics, the meaning of the
// fields (duration, envelope identifier, conditional bit, channel-on flag, pulse
// parameters) and the channel count (22 DAC channels, 2 ADC channels, 3 envelope
// memories) follow the published design; the bit layout, the opcode values, the
// widths and the fixed-point formats are this design's own choices.
//
// Instruction word, MSB first:
//   [127:124] opcode   [123:122] cond   [121:117] cond_bit   [116] on
//   [115:112] env id   [111:68] duration (clock cycles, 0 counts as 1)
//   [67:36]   p0       [35:0] reserved (write 0)
// p0 use: STF: frequency tuning word; STA: p0[15:0] amplitude; STP: p0[31:16]
// phase offset; STAP: both; RDO: p0[15:0] threshold, p0[20:16] measurement bit,
// p0[21] mode (0 charge sensing, 1 reflectometry), p0[22] ADC select.
package qc_pkg;

  localparam int N_CH     = 22;   // DAC channels / execution cores
  localparam int N_ADC    = 2;    // ADC readout channels
  localparam int N_ENV    = 3;    // envelope memories
  localparam int INSTR_W  = 128;
  localparam int DUR_W    = 44;   // 2^44 x 5 ns is about 24 hours
  localparam int SAMPLE_W = 16;
  localparam int FREQ_W   = 32;
  localparam int PHASE_W  = 16;
  localparam int MEAS_W   = 32;   // measurement register bits
  localparam int MBIT_W   = $clog2(MEAS_W);
  localparam int ENV_AW   = 10;   // envelope sample index width
  localparam int FIR_TAPS = 8;
  localparam int SKEW_W   = 6;    // delay 0..63 cycles
  localparam int COEF_ONE = 16384; // 1.0 in the Q2.14 coefficient format

  typedef logic signed [SAMPLE_W-1:0] sample_t;
  typedef logic signed [15:0]         coef_t;   // Q2.14

  typedef enum logic [3:0] {
    OP_WAIT = 4'd0,
    OP_STA  = 4'd1,
    OP_STF  = 4'd2,
    OP_STP  = 4'd3,
    OP_STAP = 4'd4,
    OP_SYNC = 4'd5,
    OP_RDO  = 4'd6
  } opcode_e;

  typedef enum logic [1:0] {
    COND_ALWAYS = 2'd0,
    COND_IF_ONE = 2'd1,
    COND_IF_ZERO = 2'd2
  } cond_e;

  typedef struct packed {
    opcode_e          op;
    cond_e            cond;
    logic [4:0]       cond_bit;
    logic             on;
    logic [3:0]       env;
    logic [DUR_W-1:0] dur;
    logic [31:0]      p0;
    logic [35:0]      rsvd;
  } instr_t;

  // Pulse parameters a core presents to its signal synthesis stage each cycle.
  typedef struct packed {
    logic                 active;   // channel output enabled
    logic signed [15:0]   amp;      // Q1.15 amplitude
    logic [FREQ_W-1:0]    freq;     // NCO tuning word
    logic [PHASE_W-1:0]   phase;    // phase offset, full turn = 2^16
    logic [3:0]           env;      // 0 = flat, 1..N_ENV = envelope memory
    logic [ENV_AW-1:0]    env_idx;  // cycles since the instruction began (saturating)
  } pulse_t;

  // A readout request issued by an RDO instruction.
  typedef struct packed {
    logic             valid;
    logic             adc;       // which readout unit
    logic             mode;      // 0 charge sensing, 1 reflectometry
    logic [4:0]       mbit;      // measurement register bit for the outcome
    logic signed [15:0] thr;     // discrimination threshold
    logic [DUR_W-1:0] window;    // measurement window in cycles
  } rdo_req_t;

  // Per-channel configuration held in the control registers.
  typedef struct packed {
    logic               dc_mode;   // 0 RF path, 1 DC/arbitrary path
    coef_t              gain;
    coef_t              a11, a12, a21, a22;  // quadrature correction matrix
    sample_t            off_i, off_q;        // DC offset correction
    logic [SKEW_W-1:0]  skew;                // delay in cycles
    logic [15:0]        slew;                // DC path rise/fall step per cycle, 0 = step
    logic [9:0]         prog_len;            // instructions in the program
    coef_t [FIR_TAPS-1:0] fir;               // predistortion taps
  } ch_cfg_t;

  typedef enum logic [1:0] {
    MODE_SINGLE    = 2'd0,
    MODE_CONDUCTOR = 2'd1,
    MODE_PERFORMER = 2'd2
  } exec_mode_e;

  // Synchronization link commands between controllers.
  typedef enum logic [1:0] {
    LINK_IDLE  = 2'd0,
    LINK_START = 2'd1,
    LINK_STOP  = 2'd2
  } link_cmd_e;

  function automatic sample_t sat16(input logic signed [47:0] v);
    if (v > 48'sd32767)       return 16'sh7FFF;
    else if (v < -48'sd32768) return 16'sh8000;
    else                      return v[15:0];
  endfunction

endpackage
