// result_uploader: sends the buffered execution times to the host.
//
// While `en` is high and the result buffer holds data, the uploader reads
// one value (one-cycle registered read), then hands its bytes to the UART
// transmitter, least significant byte first, with a valid/ready handshake.
// Each WIDTH-bit value becomes ceil(WIDTH/8) bytes with no framing between
// values: the host knows the word size and reassembles the stream. `busy`
// is high from the read until the last byte has been accepted by the UART.
//
// From the paper: time values are collected in a buffer and transmitted
// over UART once enough are collected or the buffer is full. This design's
// own choices: the byte order, the absence of framing, and one value at a
// time.
module result_uploader #(
  parameter int unsigned WIDTH = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  // result buffer read side
  input  logic             buf_empty,
  output logic             buf_pop,
  input  logic [WIDTH-1:0] buf_rdata,
  input  logic             buf_rvalid,
  // byte stream to the UART
  output logic             out_valid,
  input  logic             out_ready,
  output logic [7:0]       out_data,
  output logic             busy
);

  localparam int unsigned NBYTES = (WIDTH + 7) / 8;
  localparam int unsigned BW     = (NBYTES > 1) ? $clog2(NBYTES) : 1;

  typedef enum logic [1:0] {U_IDLE, U_READ, U_SEND} ustate_e;

  ustate_e             st;
  logic [NBYTES*8-1:0] word;
  logic [BW-1:0]       idx;

  assign buf_pop   = (st == U_IDLE) && en && !buf_empty;
  assign out_valid = (st == U_SEND);
  assign out_data  = word[idx*8 +: 8];
  assign busy      = (st != U_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st   <= U_IDLE;
      idx  <= '0;
      word <= '0;
    end else begin
      unique case (st)
        U_IDLE: if (buf_pop) st <= U_READ;
        U_READ: if (buf_rvalid) begin
          word <= (NBYTES*8)'(buf_rdata);
          idx  <= '0;
          st   <= U_SEND;
        end
        U_SEND: if (out_ready) begin
          if (idx == BW'(NBYTES - 1)) st <= U_IDLE;
          else                        idx <= idx + 1'b1;
        end
        default: st <= U_IDLE;
      endcase
    end
  end

endmodule
