// tb_sobel_workload: the measurement system at its default sizes (four
// P-buses, 32-bit stopwatch, 1024-entry buffer, 115200 baud at 100 MHz)
// measuring a Sobel-filter dataflow graph at phase, actor and graph level.
//
// Four processor stand-ins run the actors getPixel, GX, GY and ABS, one per
// processor. They model time only: each phase lasts a fixed number of
// cycles, and read/write phases additionally wait for tokens or space on
// the channels (getPixel -> GX and getPixel -> GY carry 9 tokens per
// firing, GX -> ABS and GY -> ABS one). Phase lengths follow the measured
// Sobel 9x9 numbers the design was characterised with (compute: average;
// read/write: best case, with the token waits on top). Every annotation
// point costs two cycles, as a start/stop command or as an equivalent
// delay, so the timing is the same in every scenario.
//
// Scenarios, each run for R = 3 iterations with num_meas = R:
//   phase level: each of the 10 read/compute/write phases in turn;
//   actor level: each of the 4 actors;
//   graph level: one start before the first iteration, a stop after every
//                ABS firing, auto-restart (end-to-end latency, then periods).
// Expected values come from the cycle stamps of the accepted start and stop
// beats; deterministic compute phases must read exactly their length plus
// the two-cycle cost of the start statement. Every value is decoded from
// the UART line, and the power-trigger pulse lengths are checked too.
module tb_sobel_workload;
  import meas_pkg::*;
  localparam int N = 4, CPB = 868, R = 3;

  typedef enum int {LV_PHASE, LV_ACTOR, LV_SDFG} level_e;

  logic clk = 1'b0, rst_n = 1'b0;
  logic             s_tvalid [N];
  logic             s_tready [N];
  logic [CMD_W-1:0] s_tdata  [N];
  logic power_trigger, uart_txd, measuring, sw_overflow, buf_full;
  ctrl_state_e state;
  cfg_t cfg;
  logic [10:0] buf_count;
  logic [ARG_W-1:0] meas_cnt;

  int checks = 0, failures = 0;
  int cyc = 0;
  longint exp_val[$];
  int exp_trig[$], trig_len[$], exact[$];
  longint got[$];
  int n_rx = 0;

  measurement_system dut (
    .clk, .rst_n, .s_tvalid, .s_tready, .s_tdata, .power_trigger, .uart_txd,
    .state, .cfg, .measuring, .sw_overflow, .buf_count, .buf_full, .meas_cnt);

  always #5 clk = ~clk;    // 100 MHz
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (12_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endtask

  task automatic send(int i, opcode_e op, int arg, output int t);
    @(negedge clk);
    s_tvalid[i] = 1'b1;
    s_tdata[i]  = make_cmd(op, ARG_W'(arg));
    @(posedge clk);
    t = cyc;
    check(s_tready[i], "P-bus ready");
    @(negedge clk);
    s_tvalid[i] = 1'b0;
    @(posedge clk);            // second cycle of the control statement
  endtask

  // ---------------- UART receiver, 4 bytes per value -----------------
  initial begin : rx
    logic [7:0] b;
    logic [31:0] v;
    longint e;
    @(posedge rst_n);
    forever begin
      for (int k = 0; k < 4; k++) begin
        @(negedge uart_txd);
        repeat (CPB / 2) @(posedge clk);
        check(!uart_txd, "start bit");
        for (int j = 0; j < 8; j++) begin
          repeat (CPB) @(posedge clk);
          b[j] = uart_txd;
        end
        repeat (CPB) @(posedge clk);
        check(uart_txd, "stop bit");
        v[k*8 +: 8] = b;
      end
      if (exp_val.size() == 0) check(0, "unexpected value");
      else begin
        e = exp_val.pop_front();
        check(longint'(v) == e, $sformatf("value %0d expected %0d", v, e));
      end
      got.push_back(longint'(v));
      n_rx++;
    end
  end

  initial begin : trig
    int t0;
    @(posedge rst_n);
    forever begin
      @(posedge clk iff power_trigger);
      t0 = cyc;
      @(posedge clk iff !power_trigger);
      trig_len.push_back(cyc - t0);
    end
  end

  // ---------------- the dataflow graph -------------------------------
  // channels: 0 getPixel->GX, 1 getPixel->GY, 2 GX->ABS, 3 GY->ABS
  int tok [4];
  int cap [4] = '{9, 9, 1, 1};

  level_e level;
  int     meas_pe, start_pt, stop_pt;   // measured processor and its points
  int     t_start;
  bit     restart_mode;

  // annotation point `pt` of processor `pe`; `last` marks the final point
  task automatic point(int pe, int pt, bit last);
    int t;
    bit here;
    case (level)
      LV_PHASE: here = 1'b1;
      LV_ACTOR: here = (pt == 0) || last;
      default:  here = 1'b0;
    endcase
    if (!here) return;
    if (pe == meas_pe && pt == start_pt) begin
      send(pe, OP_START, 0, t);
      t_start = t;
    end else if (pe == meas_pe && pt == stop_pt) begin
      send(pe, OP_STOP, 0, t);
      exp_val.push_back(longint'(t - t_start));
      exp_trig.push_back(t - t_start);
    end else begin
      repeat (2) @(posedge clk);       // delay statement of equal length
    end
  endtask

  task automatic busy(int n);
    repeat (n) @(posedge clk);
  endtask

  task automatic pe_getpixel();
    for (int it = 0; it < R; it++) begin
      point(0, 0, 0);
      busy(7949);                                          // compute
      point(0, 1, 0);
      while (tok[0] + 9 > cap[0] || tok[1] + 9 > cap[1]) @(posedge clk);
      busy(15079);                                         // write 9+9 tokens
      tok[0] += 9; tok[1] += 9;
      point(0, 2, 1);
    end
  endtask

  task automatic pe_grad(int pe, int cin, int cout);
    int t;
    for (int it = 0; it < R; it++) begin
      point(pe, 0, 0);
      while (tok[cin] < 9) @(posedge clk);
      busy(17664);                                         // read 9 tokens
      tok[cin] -= 9;
      point(pe, 1, 0);
      busy(4575);                                          // compute
      point(pe, 2, 0);
      while (tok[cout] + 1 > cap[cout]) @(posedge clk);
      busy(282);                                           // write 1 token
      tok[cout] += 1;
      point(pe, 3, 1);
    end
  endtask

  task automatic pe_abs();
    int t;
    for (int it = 0; it < R; it++) begin
      point(3, 0, 0);
      while (tok[2] < 1 || tok[3] < 1) @(posedge clk);
      busy(20126);                                         // read 2 tokens
      tok[2] -= 1; tok[3] -= 1;
      point(3, 1, 0);
      busy(52);                                            // compute
      if (level == LV_SDFG) begin
        send(3, OP_STOP, 0, t);
        exp_val.push_back(longint'(t - t_start));
        exp_trig.push_back(restart_mode ? t - t_start - 1 : t - t_start);
        restart_mode = 1'b1;
        t_start = t;
      end else begin
        point(3, 2, 1);
      end
    end
  endtask

  task automatic run_scenario(level_e lv, int pe, int spt, int ept, string name, int exact_len);
    int t, first_rx;
    level = lv; meas_pe = pe; start_pt = spt; stop_pt = ept;
    restart_mode = 1'b0;
    foreach (tok[i]) tok[i] = 0;
    send(0, OP_SET_STOPS, 1, t);
    send(0, OP_SET_NMEAS, R, t);
    send(0, OP_SET_AUTORST, lv == LV_SDFG, t);
    busy(2);
    first_rx = n_rx;
    got.delete();
    if (lv == LV_SDFG) begin
      send(0, OP_START, 0, t);       // start() before the processing loop
      t_start = t;
    end
    fork
      pe_getpixel();
      pe_grad(1, 0, 2);
      pe_grad(2, 1, 3);
      pe_abs();
    join
    wait (n_rx == first_rx + R && state == ST_IDLE);
    check(exp_val.size() == 0, {name, ": all values received"});
    check(trig_len.size() == exp_trig.size(), {name, ": trigger pulse count"});
    while (trig_len.size() != 0 && exp_trig.size() != 0)
      check(trig_len.pop_front() == exp_trig.pop_front(), {name, ": trigger pulse length"});
    trig_len.delete(); exp_trig.delete();
    if (exact_len > 0)
      foreach (got[i]) check(got[i] == longint'(exact_len + 2), $sformatf("%s: %0d cycles", name, got[i]));
    begin
      longint mn = got[0], mx = got[0], sum = 0;
      foreach (got[i]) begin
        if (got[i] < mn) mn = got[i];
        if (got[i] > mx) mx = got[i];
        sum += got[i];
      end
      $display("%-18s best %7d  avg %9.1f  worst %7d", name, mn, real'(sum) / R, mx);
    end
  endtask

  initial begin
    for (int i = 0; i < N; i++) begin s_tvalid[i] = 1'b0; s_tdata[i] = '0; end
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    busy(3);
    // phase level
    run_scenario(LV_PHASE, 0, 0, 1, "getPixel compute", 7949);
    run_scenario(LV_PHASE, 0, 1, 2, "getPixel write", 0);
    run_scenario(LV_PHASE, 1, 0, 1, "GX read", 0);
    run_scenario(LV_PHASE, 1, 1, 2, "GX compute", 4575);
    run_scenario(LV_PHASE, 1, 2, 3, "GX write", 0);
    run_scenario(LV_PHASE, 2, 0, 1, "GY read", 0);
    run_scenario(LV_PHASE, 2, 1, 2, "GY compute", 4575);
    run_scenario(LV_PHASE, 2, 2, 3, "GY write", 0);
    run_scenario(LV_PHASE, 3, 0, 1, "ABS read", 0);
    run_scenario(LV_PHASE, 3, 1, 2, "ABS compute", 52);
    // actor level (stop point is the actor's last point)
    run_scenario(LV_ACTOR, 0, 0, 2, "getPixel actor", 0);
    run_scenario(LV_ACTOR, 1, 0, 3, "GX actor", 0);
    run_scenario(LV_ACTOR, 2, 0, 3, "GY actor", 0);
    run_scenario(LV_ACTOR, 3, 0, 2, "ABS actor", 0);
    // graph level with auto-restart
    run_scenario(LV_SDFG, 3, -1, -1, "Sobel iteration", 0);
    check(n_rx == 15 * R, "all scenarios uploaded");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
