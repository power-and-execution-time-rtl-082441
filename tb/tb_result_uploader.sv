// tb_result_uploader: a buffer model here (queue with a one-cycle
// registered read) feeds the uploader; the byte sink accepts with random
// ready. Checks that every value comes out as its bytes, least significant
// first, that nothing is read while `en` is low, and that `busy` falls
// after the last byte.
module tb_result_uploader;
  localparam int W = 24;

  logic clk = 1'b0, rst_n = 1'b0;
  logic en = 1'b0, buf_empty, buf_pop, buf_rvalid = 1'b0;
  logic [W-1:0] buf_rdata = '0;
  logic out_valid, out_ready = 1'b0, busy;
  logic [7:0] out_data;
  int checks = 0, failures = 0;
  logic [W-1:0] bufq[$];
  logic [7:0] expq[$];
  int n_bytes = 0;

  result_uploader #(.WIDTH(W)) dut (.clk, .rst_n, .en, .buf_empty, .buf_pop, .buf_rdata,
                                    .buf_rvalid, .out_valid, .out_ready, .out_data, .busy);

  always #5 clk = ~clk;
  assign buf_empty = (bufq.size() == 0);

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

  always @(posedge clk) begin
    buf_rvalid <= 1'b0;
    if (rst_n && buf_pop) begin
      check(en, "pop only while enabled");
      buf_rdata  <= bufq.pop_front();
      buf_rvalid <= 1'b1;
    end
    if (rst_n && out_valid && out_ready) begin
      check(out_data == expq.pop_front(), "byte order and value");
      n_bytes++;
    end
    out_ready <= ($urandom_range(0, 2) != 0);
  end

  initial begin
    logic [W-1:0] v;
    int n;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < 20; r++) begin
      n = $urandom_range(1, 8);
      for (int i = 0; i < n; i++) begin
        v = W'($urandom);
        bufq.push_back(v);
        for (int b = 0; b < (W + 7) / 8; b++) expq.push_back(v[b*8 +: 8]);
      end
      repeat (10) @(posedge clk);
      check(!busy && bufq.size() == n, "nothing read while disabled");
      en = 1'b1;
      while (bufq.size() != 0 || busy) @(posedge clk);
      en = 1'b0;
      check(expq.size() == 0, "all bytes delivered");
    end
    check(n_bytes > 0, "bytes seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
