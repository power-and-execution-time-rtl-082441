// pbus_decoder: slave end of one processor's peripheral bus (P-bus).
//
// Each processor of the MPSoC owns an exclusive AXI4-Stream link to the
// measurement controller, so that a trigger never waits for another
// processor. This block is the receiving end of one such link. It is always
// ready (s_tready = 1), so a single stream write on the processor side is
// enough to deliver a command; the word is decoded and presented on `cmd`
// for exactly one cycle, one clock after the beat was accepted. Words with
// an unknown opcode, and NOP words, are accepted and dropped.
//
// Timing: beat accepted in cycle t -> cmd pulse in cycle t+1. All P-buses
// share this fixed latency, so the difference between a start and a stop is
// preserved exactly.
//
// From the paper: one exclusive peripheral bus per processor, AXI4-Stream as
// that bus, start/stop and configuration commands sent over it. This
// design's own choices: the always-ready slave, the command word layout
// (see meas_pkg) and the one-cycle register stage.
module pbus_decoder
  import meas_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             s_tvalid,
  output logic             s_tready,
  input  logic [CMD_W-1:0] s_tdata,
  output cmd_t             cmd
);

  opcode_e op;
  cmd_t    cmd_d;

  assign s_tready = 1'b1;
  assign op       = opcode_e'(s_tdata[CMD_W-1 -: OP_W]);

  always_comb begin
    cmd_d = CMD_NONE;
    if (s_tvalid) begin
      unique case (op)
        OP_START:       cmd_d.start = 1'b1;
        OP_STOP:        cmd_d.stop  = 1'b1;
        OP_SET_STOPS,
        OP_SET_NMEAS,
        OP_SET_AUTORST: begin
          cmd_d.cfg_valid = 1'b1;
          cmd_d.cfg_op    = op;
          cmd_d.cfg_arg   = s_tdata[ARG_W-1:0];
        end
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) cmd <= CMD_NONE;
    else        cmd <= cmd_d;
  end

endmodule
