// measurement_system: on-chip part of the timing and power measurement setup.
//
// Sits beside an MPSoC whose processors run instrumented dataflow
// software. Each processor drives one P-bus (AXI4-Stream slave port here)
// with start, stop and configuration commands. The system
//
//   P-bus[i] -> pbus_decoder[i] -+
//                                +-> meas_controller -> stopwatch -> result_buffer
//                                        |                               |
//                                        +-> power_trigger (to meter)    v
//                                                          result_uploader -> uart_tx -> uart_txd
//
// measures the time between the first start and the configured number of
// stops in clock cycles, stores every time in the result buffer, raises
// `power_trigger` for the external power meter for the length of each
// measurement, and uploads the buffer over the UART once a series is
// complete. The processors, their buses, the power meter and the host are
// outside this module; their signals are the ports.
//
// Latency: a P-bus beat accepted in cycle t acts in cycle t+1; the power
// trigger follows in cycle t+2. Time values are exact cycle differences
// between the accepted start and the accepted final stop.
//
// The partitioning (measurement controller, stopwatch, buffer, UART to the
// host, trigger wire to the power meter, one P-bus per processor) follows
// the paper; widths, buffer depth and UART rate are this design's defaults.
module measurement_system
  import meas_pkg::*;
#(
  parameter int unsigned N_PBUS       = 4,
  parameter int unsigned CNT_W        = 32,
  parameter int unsigned BUF_DEPTH    = 1024,
  parameter int unsigned CLKS_PER_BIT = 868
) (
  input  logic             clk,
  input  logic             rst_n,
  // P-buses, one per processor
  input  logic             s_tvalid [N_PBUS],
  output logic             s_tready [N_PBUS],
  input  logic [CMD_W-1:0] s_tdata  [N_PBUS],
  // to the external power meter
  output logic             power_trigger,
  // to the host (through a UART-to-USB converter)
  output logic             uart_txd,
  // status
  output ctrl_state_e      state,
  output cfg_t             cfg,
  output logic             measuring,    // stopwatch running
  output logic             sw_overflow,  // current time value saturated
  output logic [$clog2(BUF_DEPTH+1)-1:0] buf_count,
  output logic             buf_full,
  output logic [ARG_W-1:0] meas_cnt      // values stored in the current series
);

  cmd_t             cmd [N_PBUS];
  logic             sw_start, sw_stop;
  logic [CNT_W-1:0] sw_value;
  logic             sw_valid;
  logic             upload_en, upload_done;

  logic             buf_pop, buf_rvalid, buf_empty;
  logic [CNT_W-1:0] buf_rdata;
  logic             up_busy, tx_valid, tx_ready, tx_active;
  logic [7:0]       tx_data;

  for (genvar i = 0; i < int'(N_PBUS); i++) begin : g_pbus
    pbus_decoder u_dec (
      .clk, .rst_n,
      .s_tvalid (s_tvalid[i]),
      .s_tready (s_tready[i]),
      .s_tdata  (s_tdata[i]),
      .cmd      (cmd[i])
    );
  end

  meas_controller #(.N_PBUS(N_PBUS), .BUF_DEPTH(BUF_DEPTH)) u_ctrl (
    .clk, .rst_n,
    .cmd,
    .upload_done,
    .sw_start,
    .sw_stop,
    .trigger   (power_trigger),
    .upload_en,
    .state,
    .cfg,
    .meas_cnt
  );

  stopwatch #(.CNT_W(CNT_W)) u_sw (
    .clk, .rst_n,
    .start       (sw_start),
    .stop        (sw_stop),
    .running     (measuring),
    .value       (sw_value),
    .value_valid (sw_valid),
    .overflow    (sw_overflow)
  );

  result_buffer #(.WIDTH(CNT_W), .DEPTH(BUF_DEPTH)) u_buf (
    .clk, .rst_n,
    .push   (sw_valid),
    .wdata  (sw_value),
    .pop    (buf_pop),
    .rdata  (buf_rdata),
    .rvalid (buf_rvalid),
    .count  (buf_count),
    .full   (buf_full),
    .empty  (buf_empty)
  );

  result_uploader #(.WIDTH(CNT_W)) u_up (
    .clk, .rst_n,
    .en         (upload_en),
    .buf_empty,
    .buf_pop,
    .buf_rdata,
    .buf_rvalid,
    .out_valid  (tx_valid),
    .out_ready  (tx_ready),
    .out_data   (tx_data),
    .busy       (up_busy)
  );

  uart_tx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_tx (
    .clk, .rst_n,
    .in_valid (tx_valid),
    .in_ready (tx_ready),
    .in_data  (tx_data),
    .txd      (uart_txd),
    .active   (tx_active)
  );

  assign upload_done = buf_empty && !up_busy && !tx_active;

  // The controller's own count of stored values must match the buffer.
  a_count_match: assert property (@(posedge clk) disable iff (!rst_n)
                                  state != ST_UPLOAD |-> buf_count == ($bits(buf_count))'(meas_cnt));

endmodule
