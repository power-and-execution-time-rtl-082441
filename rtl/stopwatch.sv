// stopwatch: cycle-accurate execution-time counter.
//
// The stopwatch runs on the same clock as the processors, so its count is
// an exact number of processor cycles. The measurement controller pulses
// `start` in the cycle it accepts the first start trigger and `stop` in the
// cycle it accepts the last required stop trigger. With a start in cycle t0
// and a stop in cycle t1 the stopwatch reports t1 - t0 on `value`, with
// `value_valid` high in cycle t1 itself (the value comes straight from the
// count register, so it can be written into the result buffer in the same
// cycle). A start and a stop in the same cycle (auto-restart) report the
// running measurement and start the next one at once, so back-to-back
// measurements cover every cycle exactly once.
//
// The counter saturates at its maximum instead of wrapping; `overflow`
// then stays high until the next start, and a saturated reading equals
// 2**CNT_W - 1.
//
// From the paper: a stopwatch inside the FPGA, driven by the measurement
// controller and clocked with the MPSoC clock. This design's own choices:
// the counter width (32 bits, about 43 s at 100 MHz), the t1 - t0
// convention and saturation.
module stopwatch #(
  parameter int unsigned CNT_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             stop,
  output logic             running,
  output logic [CNT_W-1:0] value,
  output logic             value_valid,
  output logic             overflow
);

  logic [CNT_W-1:0] count;
  logic             sat;

  assign sat = &count;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      count    <= '0;
      running  <= 1'b0;
      overflow <= 1'b0;
    end else if (start) begin
      count    <= CNT_W'(1);
      running  <= 1'b1;
      overflow <= 1'b0;
    end else if (stop) begin
      running  <= 1'b0;
    end else if (running) begin
      if (sat) overflow <= 1'b1;
      else     count    <= count + 1'b1;
    end
  end

  assign value       = count;
  assign value_valid = stop && running;

endmodule
