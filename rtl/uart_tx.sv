// uart_tx: 8N1 serial transmitter for uploading results to the host.
//
// Sends one byte per handshake: when `in_valid` and `in_ready` are both high
// the byte is taken and shifted out on `txd` as one start bit (0), eight
// data bits LSB first and one stop bit (1), each CLKS_PER_BIT clocks long.
// `in_ready` is high while the line is idle and in the last clock of a stop
// bit, so bytes follow each other without a gap. A byte taken in cycle t
// puts its start bit on `txd` from cycle t+1 and occupies the line for
// exactly 10 * CLKS_PER_BIT cycles. `txd` idles high; it is decoded from
// registers (busy flag and shift register) in the same clock domain.
//
// From the paper: the time values go to the host over a UART (through a
// UART-to-USB converter). The frame format and the rate (115200 baud from
// 100 MHz, CLKS_PER_BIT = 868) are this design's own choice.
module uart_tx #(
  parameter int unsigned CLKS_PER_BIT = 868
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  output logic       in_ready,
  input  logic [7:0] in_data,
  output logic       txd,
  output logic       active     // a frame is on the line
);

  localparam int unsigned CW = (CLKS_PER_BIT > 1) ? $clog2(CLKS_PER_BIT) : 1;

  logic [9:0]    shreg;     // frame being sent, shreg[0] is on the line
  logic [3:0]    bits_left;
  logic [CW-1:0] clk_cnt;
  logic          busy;
  logic          bit_end;   // last clock of the current bit
  logic          last;      // last clock of the stop bit

  assign bit_end  = busy && (clk_cnt == CW'(CLKS_PER_BIT - 1));
  assign last     = bit_end && (bits_left == 4'd1);
  assign in_ready = !busy || last;
  assign txd      = busy ? shreg[0] : 1'b1;
  assign active   = busy;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      shreg     <= '1;
      bits_left <= '0;
      clk_cnt   <= '0;
      busy      <= 1'b0;
    end else if (in_valid && in_ready) begin
      shreg     <= {1'b1, in_data, 1'b0};
      busy      <= 1'b1;
      bits_left <= 4'd10;
      clk_cnt   <= '0;
    end else if (last) begin
      busy      <= 1'b0;
    end else if (bit_end) begin
      clk_cnt   <= '0;
      shreg     <= {1'b1, shreg[9:1]};
      bits_left <= bits_left - 1'b1;
    end else if (busy) begin
      clk_cnt   <= clk_cnt + 1'b1;
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           in_valid && !in_ready |=> in_valid && $stable(in_data));

endmodule
