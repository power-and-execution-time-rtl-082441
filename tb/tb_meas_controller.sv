// tb_meas_controller: directed scenarios for the start/stop rules of the
// measurement controller, driven with decoded commands on four P-buses:
// stop while idle, first start wins and later starts are ignored,
// configuration ignored while running and lowest P-bus wins, several stops
// in one cycle, the configured number of stops, auto-restart with its
// one-clock trigger gap, upload after the configured number of measurements
// and after a full buffer (BUF_DEPTH = 4), triggers ignored during upload.
module tb_meas_controller;
  import meas_pkg::*;
  localparam int N = 4, BD = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  cmd_t cmd [N];
  logic upload_done = 1'b0;
  logic sw_start, sw_stop, trigger, upload_en;
  ctrl_state_e state;
  cfg_t cfg;
  logic [ARG_W-1:0] meas_cnt;
  int checks = 0, failures = 0;

  meas_controller #(.N_PBUS(N), .BUF_DEPTH(BD)) dut (.clk, .rst_n, .cmd, .upload_done, .sw_start,
      .sw_stop, .trigger, .upload_en, .state, .cfg, .meas_cnt);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  task automatic clear();
    for (int i = 0; i < N; i++) cmd[i] = CMD_NONE;
  endtask

  task automatic put(int i, opcode_e op, int arg = 0);
    case (op)
      OP_START: cmd[i].start = 1'b1;
      OP_STOP:  cmd[i].stop  = 1'b1;
      default: begin cmd[i].cfg_valid = 1'b1; cmd[i].cfg_op = op; cmd[i].cfg_arg = ARG_W'(arg); end
    endcase
  endtask

  // commands placed with put() are seen in this cycle; the combinational
  // outputs are checked against exp_start/exp_stop, then the clock ticks
  task automatic step(bit exp_start, bit exp_stop, string what);
    #1;
    check(sw_start == exp_start, {what, ": sw_start"});
    check(sw_stop  == exp_stop,  {what, ": sw_stop"});
    @(posedge clk); #1;
    clear();
  endtask

  task automatic one_measurement(int sbus, int pbus, string what);
    put(sbus, OP_START); step(1, 0, {what, " start"});
    check(state == ST_RUN, {what, " running"});
    step(0, 0, {what, " wait"});
    check(trigger, {what, " trigger high"});
    put(pbus, OP_STOP); step(0, 1, {what, " stop"});
  endtask

  initial begin
    clear();
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk); #1;
    check(state == ST_IDLE && !trigger && cfg.num_stops == 1 && cfg.num_meas == 0 && !cfg.auto_restart,
          "reset state and configuration");

    // stop while idle is ignored
    put(3, OP_STOP); step(0, 0, "idle stop");
    check(state == ST_IDLE, "still idle");

    // first start wins, later starts ignored, configuration ignored in RUN
    put(2, OP_START); step(1, 0, "start");
    check(state == ST_RUN && trigger, "run, trigger high");
    put(0, OP_START); put(1, OP_SET_STOPS, 5); step(0, 0, "second start");
    check(cfg.num_stops == 1, "configuration ignored while running");
    put(3, OP_STOP); step(0, 1, "single stop ends");
    check(state == ST_IDLE && !trigger && meas_cnt == 1, "idle after stop");

    // configuration: lowest P-bus wins
    put(0, OP_SET_STOPS, 3); put(1, OP_SET_STOPS, 7); step(0, 0, "cfg");
    check(cfg.num_stops == 3, "lowest P-bus configures");

    // three stops needed: two in one cycle, then one more
    put(1, OP_START); put(3, OP_START); step(1, 0, "two sources start");
    put(1, OP_STOP); put(2, OP_STOP); step(0, 0, "two stops together");
    check(state == ST_RUN, "still running after 2 of 3 stops");
    put(3, OP_STOP); step(0, 1, "third stop");
    check(state == ST_IDLE && meas_cnt == 2, "idle after three stops");

    // last stop and a start in the same cycle, no auto-restart: start ignored
    put(0, OP_SET_STOPS, 1); step(0, 0, "cfg 1 stop");
    put(0, OP_START); step(1, 0, "start");
    put(1, OP_STOP); put(0, OP_START); step(0, 1, "stop with start");
    check(state == ST_IDLE, "same-cycle start ignored");
    // meas_cnt is now 3 of BD=4: the next measurement fills the buffer
    one_measurement(2, 2, "fill");
    check(state == ST_UPLOAD && upload_en && meas_cnt == 4, "upload when buffer full");
    put(0, OP_START); step(0, 0, "start during upload");
    check(state == ST_UPLOAD, "upload not interrupted");
    repeat (3) begin
      put(1, OP_STOP); step(0, 0, "stop during upload");
    end
    upload_done = 1'b1; step(0, 0, "upload done");
    upload_done = 1'b0;
    check(state == ST_IDLE && meas_cnt == 0 && !upload_en, "idle after upload");

    // auto-restart, three measurements per series
    put(0, OP_SET_AUTORST, 1); step(0, 0, "cfg auto");
    put(1, OP_SET_NMEAS, 3); step(0, 0, "cfg nmeas");
    check(cfg.auto_restart && cfg.num_meas == 3, "auto-restart configured");
    put(0, OP_START); step(1, 0, "series start");
    repeat (4) step(0, 0, "iteration");
    check(trigger, "trigger high");
    put(3, OP_STOP); step(1, 1, "restart 1");
    check(!trigger && state == ST_RUN, "one-clock trigger gap");
    step(0, 0, "gap");
    check(trigger, "trigger back high");
    put(3, OP_STOP); step(1, 1, "restart 2");
    step(0, 0, "iteration");
    put(3, OP_STOP); step(0, 1, "third ends series");
    check(state == ST_UPLOAD && meas_cnt == 3 && !trigger, "upload after num_meas");
    upload_done = 1'b1; step(0, 0, "upload done"); upload_done = 1'b0;
    check(state == ST_IDLE, "idle again");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
