// meas_pkg: types and constants shared by the measurement system.
//
// Every processor talks to the measurement controller over its own
// peripheral bus (P-bus), an AXI4-Stream link carrying 32-bit command
// words. A command word is laid out as
//
//   [31:28]  opcode (opcode_e)
//   [27:0]   argument (only used by the configuration opcodes)
//
// START and STOP are the two trigger statements the instrumented software
// issues around the code block it wants measured. The SET_* opcodes are the
// configuration interface (number of stops that end a measurement, number of
// measurements before the results are uploaded, auto-restart) that software
// uses before a measurement series begins. The opcode values and the word
// layout are this design's own choice; the paper names the commands but not
// their encoding.
package meas_pkg;

  localparam int unsigned CMD_W  = 32;
  localparam int unsigned OP_W   = 4;
  localparam int unsigned ARG_W  = CMD_W - OP_W;   // 28

  typedef enum logic [OP_W-1:0] {
    OP_NOP          = 4'h0,
    OP_START        = 4'h1,  // begin a measurement (ignored while one runs)
    OP_STOP         = 4'h2,  // one stop; the measurement ends after cfg.num_stops of them
    OP_SET_STOPS    = 4'h3,  // argument: stops needed to end a measurement (0 is taken as 1)
    OP_SET_NMEAS    = 4'h4,  // argument: measurements before upload (0: upload only when the buffer is full)
    OP_SET_AUTORST  = 4'h5   // argument bit 0: restart a new measurement at every stop
  } opcode_e;

  // One decoded P-bus command; every field is valid for the single cycle
  // in which it is presented.
  typedef struct packed {
    logic             start;
    logic             stop;
    logic             cfg_valid;
    opcode_e          cfg_op;
    logic [ARG_W-1:0] cfg_arg;
  } cmd_t;

  localparam cmd_t CMD_NONE = '{start: 1'b0, stop: 1'b0, cfg_valid: 1'b0,
                                cfg_op: OP_NOP, cfg_arg: '0};

  // Configuration registers of the measurement controller.
  typedef struct packed {
    logic [ARG_W-1:0] num_stops;
    logic [ARG_W-1:0] num_meas;
    logic             auto_restart;
  } cfg_t;

  localparam cfg_t CFG_RESET = '{num_stops: ARG_W'(1), num_meas: '0, auto_restart: 1'b0};

  typedef enum logic [1:0] {
    ST_IDLE   = 2'd0,  // waiting for a start
    ST_RUN    = 2'd1,  // stopwatch running, power trigger high
    ST_UPLOAD = 2'd2   // results are being sent, triggers ignored
  } ctrl_state_e;

  function automatic logic [CMD_W-1:0] make_cmd(opcode_e op, logic [ARG_W-1:0] arg = '0);
    return {op, arg};
  endfunction

endpackage
