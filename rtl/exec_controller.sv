// exec_controller: starts and stops all execution cores together, alone or as
// one unit of a multi-controller system.
//
//  * single: a host start/stop command reaches the cores one cycle later.
//  * conductor: a host command is sent at once on the synchronization link
//    (link_out carries LINK_START or LINK_STOP for one cycle, registered) and
//    reaches the local cores link_delay + 1 cycles after the command.
//  * performer: host commands are ignored; a command received on link_in reaches
//    the local cores link_delay + 1 cycles later.
// link_delay lets the conductor wait for the link latency so that every unit's
// cores start on the same clock edge: with a link of L register stages and a
// performer delay Dp, the conductor's delay is L + 1 + Dp. A new command while one
// is pending replaces it. `running` is high while any local core is busy.
// The conductor/performer roles and the synchronization link follow the
// published design; the command codes and the delay-matching rule are this
// design's choices.
module exec_controller
  import qc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  exec_mode_e  mode,
  input  logic [15:0] link_delay,
  input  logic        host_start,
  input  logic        host_stop,
  input  link_cmd_e   link_in,
  input  logic        cores_busy,
  output link_cmd_e   link_out,
  output logic        core_start,
  output logic        core_stop,
  output logic        running
);
  logic        pend, pend_stop;
  logic [15:0] cnt;
  logic        trig, trig_stop;

  always_comb begin
    trig = 1'b0; trig_stop = 1'b0;
    if (mode == MODE_PERFORMER) begin
      trig      = (link_in == LINK_START) || (link_in == LINK_STOP);
      trig_stop = (link_in == LINK_STOP);
    end else begin
      trig      = host_start || host_stop;
      trig_stop = host_stop;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend <= 1'b0; pend_stop <= 1'b0; cnt <= '0; link_out <= LINK_IDLE;
      core_start <= 1'b0; core_stop <= 1'b0;
    end else begin
      core_start <= 1'b0;
      core_stop  <= 1'b0;
      link_out   <= LINK_IDLE;
      if (trig && mode == MODE_CONDUCTOR) link_out <= trig_stop ? LINK_STOP : LINK_START;
      if (trig) begin
        if (mode == MODE_SINGLE || link_delay == 0) begin
          pend <= 1'b0;
          core_start <= !trig_stop;
          core_stop  <= trig_stop;
        end else begin
          pend <= 1'b1; pend_stop <= trig_stop; cnt <= link_delay - 1'b1;
        end
      end else if (pend) begin
        if (cnt == 0) begin
          pend <= 1'b0;
          core_start <= !pend_stop;
          core_stop  <= pend_stop;
        end else cnt <= cnt - 1'b1;
      end
    end
  end
  assign running = cores_busy;
endmodule
