// result_buffer: on-chip FIFO for measured execution times.
//
// Every finished measurement leaves one time value here. The values stay in
// the FPGA until a series is complete, so that the serial upload never runs
// while power is being measured. The memory is a plain array with one write
// port and one registered read port, the shape an FPGA block RAM offers.
//
// Interface: `push` with `wdata` writes one word (ignored when full);
// `pop` reads one word (ignored when empty), which appears on `rdata` with
// `rvalid` high one cycle later. `count` is the fill level, `full`/`empty`
// its two ends.
//
// From the paper: a buffer on the FPGA that holds the time values until
// enough of them are collected or it is full. The paper leaves its size to
// the user; DEPTH = 1024 words is this design's default.
module result_buffer #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 1024
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     push,
  input  logic [WIDTH-1:0]         wdata,
  input  logic                     pop,
  output logic [WIDTH-1:0]         rdata,
  output logic                     rvalid,
  output logic [$clog2(DEPTH+1)-1:0] count,
  output logic                     full,
  output logic                     empty
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;
  logic             do_push, do_pop;

  assign full    = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign empty   = (count == '0);
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;

  function automatic logic [AW-1:0] next_ptr(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[wptr] <= wdata;
    if (do_pop)  rdata     <= mem[rptr];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wptr   <= '0;
      rptr   <= '0;
      count  <= '0;
      rvalid <= 1'b0;
    end else begin
      rvalid <= do_pop;
      if (do_push) wptr <= next_ptr(wptr);
      if (do_pop)  rptr <= next_ptr(rptr);
      unique case ({do_push, do_pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: ;
      endcase
    end
  end

  // Writing into a full buffer or reading an empty one is a controller bug.
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> !full);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop  |-> !empty);

endmodule
