// tb_uart_tx: sends random bytes, some back to back and some with idle
// gaps, and decodes the line with a receiver written here: it waits for
// the start bit's falling edge and samples the middle of every bit. Checks
// the data, the start and stop bits, the bit period and that a stream of
// back-to-back bytes takes exactly 10 bit times per byte.
module tb_uart_tx;
  localparam int CPB = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, in_ready, txd, active;
  logic [7:0] in_data = '0;
  int checks = 0, failures = 0;
  int cyc = 0;
  logic [7:0] sent[$];
  int n_rx = 0;
  int start_cyc[$];

  uart_tx #(.CLKS_PER_BIT(CPB)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_data, .txd, .active);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // receiver
  initial begin : rx
    logic [7:0] b;
    logic [7:0] e;
    @(posedge rst_n);
    forever begin
      @(negedge txd);
      start_cyc.push_back(cyc);
      repeat (CPB / 2) @(posedge clk);
      check(txd == 1'b0, "start bit");
      for (int k = 0; k < 8; k++) begin
        repeat (CPB) @(posedge clk);
        b[k] = txd;
      end
      repeat (CPB) @(posedge clk);
      check(txd == 1'b1, "stop bit");
      e = sent.pop_front();
      check(b == e, $sformatf("byte %h expected %h", b, e));
      n_rx++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (3) @(posedge clk);
    #1 check(txd == 1'b1 && in_ready, "idle line high and ready");
    for (int i = 0; i < 200; i++) begin
      in_valid = 1'b1;
      in_data  = 8'($urandom);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      sent.push_back(in_data);
      #1 in_valid = 1'b0;
      if (i % 20 >= 10) repeat ($urandom_range(0, 3 * CPB)) @(posedge clk);
    end
    wait (n_rx == 200);
    // bytes 0..9 of each group of 20 were sent back to back
    for (int g = 0; g < 10; g++)
      for (int k = 1; k < 10; k++)
        check(start_cyc[g*20 + k] - start_cyc[g*20 + k - 1] == 10 * CPB,
              $sformatf("byte spacing %0d", start_cyc[g*20 + k] - start_cyc[g*20 + k - 1]));
    repeat (2 * CPB) @(posedge clk);
    check(!active && txd, "idle after last byte");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
