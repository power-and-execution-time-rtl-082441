// tb_stopwatch: starts and stops the stopwatch at random gaps and checks
// each reading against the cycle difference counted here (stop cycle minus
// start cycle). Covers start and stop in the same cycle (back-to-back
// measurements), a stop without a running measurement, and saturation with
// a narrow counter (CNT_W = 8).
module tb_stopwatch;
  localparam int CNT_W = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0, stop = 1'b0;
  logic running, value_valid, overflow;
  logic [CNT_W-1:0] value;
  int checks = 0, failures = 0;
  int cyc = 0;

  stopwatch #(.CNT_W(CNT_W)) dut (.clk, .rst_n, .start, .stop, .running,
                                  .value, .value_valid, .overflow);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

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

  int t0, gap, expv;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    // stop while idle: no reading
    stop = 1'b1; #1; check(!value_valid, "no value when idle"); @(posedge clk); stop = 1'b0;
    for (int i = 0; i < 200; i++) begin
      // start
      #1 start = 1'b1; t0 = cyc;
      @(posedge clk); #1 start = 1'b0;
      check(running, "running after start");
      gap = (i % 10 == 9) ? $urandom_range(256, 400) : $urandom_range(1, 60);
      repeat (gap - 1) @(posedge clk);
      #1;
      stop = 1'b1;
      // back-to-back: every third measurement restarts at once
      if (i % 3 == 0) start = 1'b1;
      #1;
      expv = cyc - t0;
      check(value_valid, "value_valid at stop");
      if (expv > 255) begin
        check(value == 8'hff, $sformatf("saturated reading %0d", value));
        check(overflow, "overflow flag");
      end else begin
        check(int'(value) == expv, $sformatf("reading %0d expected %0d", value, expv));
        check(!overflow, "no overflow");
      end
      @(posedge clk);
      #1;
      stop = 1'b0;
      if (start) begin
        // restarted in the stop cycle: stop again after a known gap
        start = 1'b0; t0 = cyc - 1;
        gap = $urandom_range(1, 30);
        repeat (gap - 1) @(posedge clk);
        #1 stop = 1'b1; #1;
        check(value_valid && int'(value) == cyc - t0,
              $sformatf("restarted reading %0d expected %0d", value, cyc - t0));
        @(posedge clk); #1 stop = 1'b0;
      end
      check(!running, "stopped");
      repeat ($urandom_range(0, 3)) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
