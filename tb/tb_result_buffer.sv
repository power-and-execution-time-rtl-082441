// tb_result_buffer: random pushes and pops on a small FIFO (DEPTH = 8),
// checked against a SystemVerilog queue: read data and its one-cycle
// latency, fill level, full and empty. Pushes are only made when the
// buffer is not full and pops only when it is not empty, as the real
// users of the buffer do.
module tb_result_buffer;
  localparam int W = 16, D = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  logic push = 1'b0, pop = 1'b0, rvalid, full, empty;
  logic [W-1:0] wdata = '0, rdata;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] model[$];
  logic [W-1:0] exp_rd;
  bit exp_rv = 0;
  int n_full = 0, n_empty = 0;

  result_buffer #(.WIDTH(W), .DEPTH(D)) dut (.clk, .rst_n, .push, .wdata, .pop,
                                             .rdata, .rvalid, .count, .full, .empty);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk); #1;
    for (int i = 0; i < 3000; i++) begin
      // state checks
      check(int'(count) == model.size(), $sformatf("count %0d vs %0d", count, model.size()));
      check(full == (model.size() == D), "full flag");
      check(empty == (model.size() == 0), "empty flag");
      check(rvalid == exp_rv, "rvalid timing");
      if (exp_rv) check(rdata == exp_rd, $sformatf("rdata %h expected %h", rdata, exp_rd));
      if (full) n_full++;
      if (empty) n_empty++;
      // next stimulus; bias phases towards filling and towards draining
      push  = !full && ($urandom_range(0, 99) < ((i / 200) % 2 ? 30 : 70));
      pop   = !empty && ($urandom_range(0, 99) < ((i / 200) % 2 ? 70 : 30));
      wdata = W'($urandom);
      exp_rv = pop;
      if (pop) exp_rd = model.pop_front();
      if (push) model.push_back(wdata);
      @(posedge clk); #1;
    end
    check(n_full > 0 && n_empty > 0, "buffer reached both full and empty");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
