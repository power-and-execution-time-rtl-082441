// meas_controller: decides when a measurement starts and ends.
//
// The instrumented software on every processor sends `start` before the
// code block it wants measured and `stop` after it, each over its own
// P-bus. This controller merges the N_PBUS decoded command streams:
//
//  * IDLE:   the first start from any processor begins a measurement. The
//            stopwatch is started (`sw_start`) and the power trigger wire to
//            the external power meter goes high one clock later. Stops
//            arriving while idle are ignored.
//  * RUN:    further starts are ignored. Stops are counted (several in one
//            cycle count individually). When the count reaches the
//            configured number of stops (cfg.num_stops; 0 is taken as 1) the
//            measurement ends: `sw_stop` makes the stopwatch hand its value to
//            the result buffer and the trigger drops. With auto-restart on, a
//            new measurement begins in the same cycle (`sw_start` together
//            with `sw_stop`), the trigger falls for exactly one clock to mark
//            the boundary and rises again.
//  * UPLOAD: entered when the series is complete: cfg.num_meas measurements
//            are stored (num_meas = 0 means no limit) or the buffer would be
//            full. `upload_en` lets the uploader send the buffer to the host;
//            all triggers are ignored until `upload_done`, so the serial
//            transfer never overlaps a power measurement. Then back to IDLE.
//
// Configuration commands (SET_STOPS, SET_NMEAS, SET_AUTORST) are taken only
// in IDLE; if several P-buses configure in the same cycle the lowest index
// wins. A start in the same cycle as the last stop is ignored unless
// auto-restart is on.
//
// Timing: every decision is made in the cycle the decoded command arrives,
// so sw_start/sw_stop are combinational from `cmd` and the state.
//
// From the paper: first start starts, later starts are ignored, a
// configurable number of stops ends the measurement, auto-restart, number of
// measurements, upload when enough values are collected or the buffer is
// full, and a trigger signal to the power meter. This design's own choices:
// the IDLE/RUN/UPLOAD state machine, the trigger as a level with a one-clock
// gap at auto-restart boundaries, configuration only while idle and the
// same-cycle priorities above.
module meas_controller
  import meas_pkg::*;
#(
  parameter int unsigned N_PBUS    = 4,
  parameter int unsigned BUF_DEPTH = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  cmd_t        cmd [N_PBUS],
  input  logic        upload_done,   // buffer empty and uploader/UART idle
  output logic        sw_start,
  output logic        sw_stop,
  output logic        trigger,       // to the power meter: high while measuring
  output logic        upload_en,
  output ctrl_state_e state,
  output cfg_t        cfg,
  output logic [ARG_W-1:0] meas_cnt  // measurements stored in this series
);

  localparam int unsigned SCW = $clog2(N_PBUS + 1);

  logic             any_start;
  logic [SCW-1:0]   n_stop;
  logic             cfg_hit;
  opcode_e          cfg_op;
  logic [ARG_W-1:0] cfg_arg;
  logic [ARG_W-1:0] stop_cnt, stops_needed, stop_total;
  logic             meas_end, series_done;

  ctrl_state_e      state_d;
  logic             trigger_d;
  logic [ARG_W-1:0] stop_cnt_d, meas_cnt_d;

  always_comb begin
    any_start = 1'b0;
    n_stop    = '0;
    cfg_hit   = 1'b0;
    cfg_op    = OP_NOP;
    cfg_arg   = '0;
    for (int i = 0; i < int'(N_PBUS); i++) begin
      any_start |= cmd[i].start;
      n_stop    += SCW'(cmd[i].stop);
      if (cmd[i].cfg_valid && !cfg_hit) begin
        cfg_hit = 1'b1;
        cfg_op  = cmd[i].cfg_op;
        cfg_arg = cmd[i].cfg_arg;
      end
    end
  end

  assign stops_needed = (cfg.num_stops == '0) ? ARG_W'(1) : cfg.num_stops;
  assign stop_total   = stop_cnt + ARG_W'(n_stop);
  assign meas_end     = (state == ST_RUN) && (stop_total >= stops_needed);
  assign series_done  = (meas_cnt + 1'b1 >= ARG_W'(BUF_DEPTH)) ||
                        ((cfg.num_meas != '0) && (meas_cnt + 1'b1 >= cfg.num_meas));

  always_comb begin
    state_d    = state;
    trigger_d  = trigger;
    stop_cnt_d = stop_cnt;
    meas_cnt_d = meas_cnt;
    sw_start   = 1'b0;
    sw_stop    = 1'b0;
    upload_en  = 1'b0;
    unique case (state)
      ST_IDLE: begin
        if (any_start) begin
          sw_start   = 1'b1;
          state_d    = ST_RUN;
          trigger_d  = 1'b1;
          stop_cnt_d = '0;
        end
      end
      ST_RUN: begin
        if (meas_end) begin
          sw_stop    = 1'b1;
          meas_cnt_d = meas_cnt + 1'b1;
          stop_cnt_d = '0;
          trigger_d  = 1'b0;
          if (series_done) begin
            state_d = ST_UPLOAD;
          end else if (cfg.auto_restart) begin
            sw_start = 1'b1;        // next measurement starts in this very cycle
          end else begin
            state_d = ST_IDLE;
          end
        end else begin
          stop_cnt_d = stop_total;
          trigger_d  = 1'b1;        // re-raise after an auto-restart gap
        end
      end
      ST_UPLOAD: begin
        upload_en = 1'b1;
        if (upload_done) begin
          state_d    = ST_IDLE;
          meas_cnt_d = '0;
        end
      end
      default: state_d = ST_IDLE;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= ST_IDLE;
      trigger  <= 1'b0;
      stop_cnt <= '0;
      meas_cnt <= '0;
      cfg      <= CFG_RESET;
    end else begin
      state    <= state_d;
      trigger  <= trigger_d;
      stop_cnt <= stop_cnt_d;
      meas_cnt <= meas_cnt_d;
      if (state == ST_IDLE && cfg_hit) begin
        unique case (cfg_op)
          OP_SET_STOPS:   cfg.num_stops    <= cfg_arg;
          OP_SET_NMEAS:   cfg.num_meas     <= cfg_arg;
          OP_SET_AUTORST: cfg.auto_restart <= cfg_arg[0];
          default: ;
        endcase
      end
    end
  end

  // The stopwatch is only ever stopped while a measurement runs, and the
  // buffer never holds more than BUF_DEPTH values of one series.
  a_stop_in_run: assert property (@(posedge clk) disable iff (!rst_n) sw_stop |-> state == ST_RUN);
  a_buf_bound:   assert property (@(posedge clk) disable iff (!rst_n) meas_cnt <= ARG_W'(BUF_DEPTH));

endmodule
