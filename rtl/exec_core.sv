// exec_core: fetches, decodes and executes the instructions of one channel.
//
// After `start` the core reads its program (prog_len words from address 0) through
// a two-entry prefetch queue, so that one instruction can begin on every cycle: a
// sequence of one-cycle instructions runs with no idle cycle between them, as the
// published design requires ("without dead time between consecutive pulses").
// Each instruction occupies the channel for `dur` cycles (0 counts as 1).
//
//  STA/STF/STP/STAP  update amplitude, frequency and/or phase; with `on` set the
//                    channel outputs the pulse with the instruction's envelope,
//                    with `on` clear the update is silent and the channel idles.
//  WAIT              `on` clear: idle for dur cycles; `on` set: keep pulsing with
//                    the parameters set before.
//  SYNC              blocks until a rising edge of sync_trig; the next instruction
//                    begins on the cycle after the edge is seen.
//  RDO               issues one readout request (rdo_o.valid for one cycle) to the
//                    measurement unit and idles the channel for the window.
// Any instruction may be conditional on a measurement register bit being 1 or 0.
// The instruction set and its semantics follow the published design; that a
// failed condition still takes its duration (with the channel idle and no
// parameter changed) keeps every channel's timeline independent of measurement
// outcomes and is this design's choice, as is the end of a program by length.
//
// Timing: pulse_o is valid in every cycle of an instruction, starting in the cycle
// after the instruction is loaded. The first instruction begins 4 cycles after
// `start` for every core, so cores started together stay aligned.
// `start` also clears amplitude, frequency and phase, so every run of a program
// (every shot of an experiment) begins from the same state and, with the NCO
// cleared at the same moment, produces the same carrier phases; this is this
// design's choice.
module exec_core
  import qc_pkg::*;
#(
  parameter int IMEM_AW = 10
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic               stop,
  input  logic [IMEM_AW-1:0] prog_len,
  output logic               imem_rd_en,
  output logic [IMEM_AW-1:0] imem_rd_addr,
  input  logic [INSTR_W-1:0] imem_rd_data,
  input  logic [MEAS_W-1:0]  meas,
  input  logic               sync_trig,
  output pulse_t             pulse_o,
  output rdo_req_t           rdo_o,
  output logic               busy,
  output logic               done,
  // event strobes, for monitoring
  output logic               ev_issue,      // an instruction was loaded this cycle
  output opcode_e            ev_op,         // its opcode
  output logic               ev_cond_skip,  // it was loaded with its condition false
  output logic               ev_sync_wait   // blocked in SYNC this cycle
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DONE} state_e;
  state_e state;

  // prefetch queue
  instr_t             q [2];
  logic               q_rd, q_wr;
  logic [1:0]         q_cnt;
  logic               inflight;
  logic [IMEM_AW:0]   fa;          // next fetch address

  // current instruction
  instr_t             cur;
  logic               cur_valid, cur_ok, first;
  logic [DUR_W-1:0]   rem;
  logic               trig_q;

  // pulse parameter registers
  logic signed [15:0] amp_r;
  logic [FREQ_W-1:0]  freq_r;
  logic [PHASE_W-1:0] phase_r;
  logic [ENV_AW-1:0]  env_idx;

  logic trig_edge, ending, pop, fetch, cond_ok;
  logic [1:0] cnt_after;
  instr_t head;

  assign trig_edge = sync_trig & ~trig_q;
  assign head      = q[q_rd];

  always_comb begin
    ending = 1'b0;
    if (state == S_RUN) begin
      if (!cur_valid) ending = 1'b1;
      else if (cur.op == OP_SYNC && cur_ok) ending = trig_edge;
      else ending = (rem <= 1);
    end
  end
  assign pop = ending && (q_cnt != 0);

  always_comb begin
    cnt_after = q_cnt + {1'b0, inflight} - {1'b0, pop};
    fetch = (state == S_RUN) && (fa < {1'b0, prog_len}) && (cnt_after <= 2'd1);
  end
  assign imem_rd_en   = fetch;
  assign imem_rd_addr = fa[IMEM_AW-1:0];

  always_comb begin
    case (head.cond)
      COND_IF_ONE:  cond_ok = meas[head.cond_bit];
      COND_IF_ZERO: cond_ok = ~meas[head.cond_bit];
      default:      cond_ok = 1'b1;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; q_cnt <= '0; q_rd <= 1'b0; q_wr <= 1'b0; inflight <= 1'b0;
      fa <= '0; cur <= '0; cur_valid <= 1'b0; cur_ok <= 1'b0; first <= 1'b0;
      rem <= '0; trig_q <= 1'b0; amp_r <= '0; freq_r <= '0; phase_r <= '0; env_idx <= '0;
      q[0] <= '0; q[1] <= '0;
    end else begin
      trig_q <= sync_trig;
      first  <= 1'b0;
      if (env_idx != '1) env_idx <= env_idx + 1'b1;
      if (state == S_RUN && rem > 1) rem <= rem - 1'b1;

      if (stop) begin
        state <= S_IDLE; cur_valid <= 1'b0; q_cnt <= '0; inflight <= 1'b0;
      end else if (start) begin
        state <= S_RUN; fa <= '0; q_cnt <= '0; q_rd <= 1'b0; q_wr <= 1'b0;
        inflight <= 1'b0; cur_valid <= 1'b0;
        amp_r <= '0; freq_r <= '0; phase_r <= '0;
      end else if (state == S_RUN) begin
        // queue bookkeeping
        inflight <= fetch;
        if (fetch) fa <= fa + 1'b1;
        if (inflight) begin
          q[q_wr] <= instr_t'(imem_rd_data);
          q_wr    <= ~q_wr;
        end
        if (pop) q_rd <= ~q_rd;
        q_cnt <= q_cnt + {1'b0, inflight} - {1'b0, pop};

        if (ending) begin
          if (pop) begin
            cur       <= head;
            cur_valid <= 1'b1;
            cur_ok    <= cond_ok;
            first     <= 1'b1;
            rem       <= (head.dur == 0) ? DUR_W'(1) : head.dur;
            env_idx   <= '0;
            if (cond_ok) begin
              unique case (head.op)
                OP_STA:  amp_r <= head.p0[15:0];
                OP_STF:  freq_r <= head.p0;
                OP_STP:  phase_r <= head.p0[31:16];
                OP_STAP: begin amp_r <= head.p0[15:0]; phase_r <= head.p0[31:16]; end
                default: ;
              endcase
            end
          end else begin
            cur_valid <= 1'b0;
            if (fa >= {1'b0, prog_len} && !inflight) state <= S_DONE;
          end
        end
      end
    end
  end

  always_comb begin
    pulse_o.active  = (state == S_RUN) && cur_valid && cur_ok && cur.on &&
                      (cur.op != OP_SYNC) && (cur.op != OP_RDO);
    pulse_o.amp     = amp_r;
    pulse_o.freq    = freq_r;
    pulse_o.phase   = phase_r;
    pulse_o.env     = cur.env;
    pulse_o.env_idx = env_idx;

    rdo_o.valid  = (state == S_RUN) && cur_valid && first && cur_ok && (cur.op == OP_RDO);
    rdo_o.thr    = cur.p0[15:0];
    rdo_o.mbit   = cur.p0[20:16];
    rdo_o.mode   = cur.p0[21];
    rdo_o.adc    = cur.p0[22];
    rdo_o.window = (cur.dur == 0) ? DUR_W'(1) : cur.dur;
  end

  assign busy         = (state == S_RUN);
  assign done         = (state == S_DONE);
  assign ev_issue     = first && (state == S_RUN);
  assign ev_op        = cur.op;
  assign ev_cond_skip = first && !cur_ok && (state == S_RUN);
  assign ev_sync_wait = (state == S_RUN) && cur_valid && cur_ok && (cur.op == OP_SYNC) && !trig_edge;
endmodule
