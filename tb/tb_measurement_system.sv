// tb_measurement_system: end-to-end test of the measurement system at
// reduced sizes (16-bit stopwatch, 8-entry buffer, 4 clocks per UART bit).
//
// Four processor stand-ins write command words onto their P-buses. The
// testbench stamps the clock cycle in which each start and stop beat is
// accepted and derives every expected time value from those stamps. A
// serial receiver decodes the UART line back into 16-bit values, and a
// monitor measures how long each power-trigger pulse lasts. Three series
// are run:
//   1. two single measurements, one with two sources (the second start is
//      ignored), upload after num_meas = 2; triggers sent during the upload
//      are ignored;
//   2. SDFG-level style: one start, two stops per measurement (two sink
//      processors), auto-restart, three measurements;
//   3. eight measurements with no limit, so the full buffer forces the
//      upload; one of them is longer than 2**16 cycles and saturates.
// Each mechanism is counted and must have happened at least once.
module tb_measurement_system;
  import meas_pkg::*;
  localparam int N = 4, CW = 16, BD = 8, CPB = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  logic             s_tvalid [N];
  logic             s_tready [N];
  logic [CMD_W-1:0] s_tdata  [N];
  logic power_trigger, uart_txd, measuring, sw_overflow, buf_full;
  ctrl_state_e state;
  cfg_t cfg;
  logic [$clog2(BD+1)-1:0] buf_count;
  logic [ARG_W-1:0] meas_cnt;

  int checks = 0, failures = 0;
  int cyc = 0;
  int exp_val[$], exp_trig[$], trig_len[$];
  int n_rx = 0;
  // mechanism counters
  int m_ignored_start = 0, m_idle_stop = 0, m_multi_stop = 0, m_autorestart = 0;
  int m_upload_nmeas = 0, m_upload_full = 0, m_ignored_in_upload = 0, m_saturate = 0;

  measurement_system #(.N_PBUS(N), .CNT_W(CW), .BUF_DEPTH(BD), .CLKS_PER_BIT(CPB)) dut (
    .clk, .rst_n, .s_tvalid, .s_tready, .s_tdata, .power_trigger, .uart_txd,
    .state, .cfg, .measuring, .sw_overflow, .buf_count, .buf_full, .meas_cnt);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endtask

  // one beat on P-bus i; t = cycle in which it was accepted
  task automatic send(int i, opcode_e op, int arg, output int t);
    @(negedge clk);
    s_tvalid[i] = 1'b1;
    s_tdata[i]  = make_cmd(op, ARG_W'(arg));
    @(posedge clk);
    t = cyc;
    check(s_tready[i], "P-bus ready");
    @(negedge clk);
    s_tvalid[i] = 1'b0;
  endtask

  task automatic cfg_cmd(opcode_e op, int arg);
    int t;
    send(0, op, arg, t);
  endtask

  task automatic wait_cycles(int n);
    repeat (n) @(posedge clk);
  endtask

  // UART receiver: two bytes per value, least significant first
  initial begin : rx
    logic [7:0] b;
    logic [15:0] v;
    int e;
    @(posedge rst_n);
    forever begin
      for (int k = 0; k < 2; k++) begin
        @(negedge uart_txd);
        repeat (CPB / 2) @(posedge clk);
        for (int j = 0; j < 8; j++) begin
          repeat (CPB) @(posedge clk);
          b[j] = uart_txd;
        end
        repeat (CPB) @(posedge clk);
        check(uart_txd, "stop bit");
        v[k*8 +: 8] = b;
      end
      if (exp_val.size() == 0) begin
        check(0, "unexpected value on UART");
      end else begin
        e = exp_val.pop_front();
        check(int'(v) == (e > 65535 ? 65535 : e), $sformatf("value %0d expected %0d", v, e));
      end
      n_rx++;
    end
  end

  // power trigger pulse lengths
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

  bit saw_full = 0;
  always @(posedge clk) if (buf_full) saw_full <= 1'b1;
  always @(posedge clk) if (sw_overflow && measuring) m_saturate <= m_saturate + 1;

  task automatic wait_upload(int total_rx);
    @(posedge clk iff state == ST_UPLOAD);
    wait (n_rx == total_rx && state == ST_IDLE);
    check(exp_val.size() == 0, "all values received");
    // compare trigger pulses
    check(trig_len.size() == exp_trig.size(), $sformatf("trigger pulses %0d expected %0d",
                                                         trig_len.size(), exp_trig.size()));
    while (trig_len.size() != 0 && exp_trig.size() != 0) begin
      int a = trig_len.pop_front(), b = exp_trig.pop_front();
      check(a == b, $sformatf("trigger length %0d expected %0d", a, b));
    end
    trig_len.delete(); exp_trig.delete();
  endtask

  initial begin
    int ts, tp, te, tq, prev, d;
    for (int i = 0; i < N; i++) begin s_tvalid[i] = 1'b0; s_tdata[i] = '0; end
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    wait_cycles(3);

    // ---- series 1 -------------------------------------------------------
    send(3, OP_STOP, 0, te);                 // stop while idle
    wait_cycles(3);
    check(state == ST_IDLE && buf_count == 0, "idle stop ignored");
    m_idle_stop++;
    cfg_cmd(OP_SET_NMEAS, 2);
    // measurement A: one processor brackets a phase of 37 cycles
    send(1, OP_START, 0, ts);
    wait_cycles(37);
    send(1, OP_STOP, 0, te);
    exp_val.push_back(te - ts); exp_trig.push_back(te - ts);
    wait_cycles(5);
    // measurement B: two source processors, the later start is ignored
    fork
      send(0, OP_START, 0, ts);
      begin wait_cycles(6); send(2, OP_START, 0, tp); end
    join
    check(tp > ts, "second start after first");
    m_ignored_start++;
    wait_cycles(120);
    send(3, OP_STOP, 0, te);
    exp_val.push_back(te - ts); exp_trig.push_back(te - ts);
    // triggers during the upload are ignored
    wait_cycles(4);
    check(state == ST_UPLOAD, "upload after two measurements");
    send(2, OP_START, 0, tp); wait_cycles(10); send(2, OP_STOP, 0, tp);
    m_ignored_in_upload++;
    m_upload_nmeas++;
    wait_upload(2);

    // ---- series 2: two sinks, auto-restart -----------------------------
    cfg_cmd(OP_SET_STOPS, 2);
    cfg_cmd(OP_SET_NMEAS, 3);
    cfg_cmd(OP_SET_AUTORST, 1);
    wait_cycles(2);
    check(cfg.num_stops == 2 && cfg.num_meas == 3 && cfg.auto_restart, "series 2 configured");
    send(0, OP_START, 0, ts);
    prev = ts;
    for (int it = 0; it < 3; it++) begin
      d = 200 + 50 * it;
      fork
        begin wait_cycles(d);       send(2, OP_STOP, 0, tp); end
        begin wait_cycles(d + 17);  send(3, OP_STOP, 0, tq); end
      join
      m_multi_stop++;
      exp_val.push_back(tq - prev);
      exp_trig.push_back(it == 0 ? tq - prev : tq - prev - 1);
      if (it > 0) m_autorestart++;
      prev = tq;
    end
    m_upload_nmeas++;
    wait_upload(5);

    // ---- series 3: buffer full, saturation -----------------------------
    cfg_cmd(OP_SET_STOPS, 1);
    cfg_cmd(OP_SET_NMEAS, 0);
    cfg_cmd(OP_SET_AUTORST, 0);
    for (int k = 0; k < BD; k++) begin
      send(k % N, OP_START, 0, ts);
      wait_cycles(k == 5 ? 70000 : $urandom_range(1, 300));
      send((k + 1) % N, OP_STOP, 0, te);
      exp_val.push_back(te - ts); exp_trig.push_back(te - ts);
      wait_cycles($urandom_range(1, 20));
      if (k == BD - 1) check(state == ST_UPLOAD && saw_full, "buffer full forces upload");
    end
    m_upload_full++;
    wait_upload(5 + BD);

    // every mechanism happened
    check(m_idle_stop > 0,        "stop while idle exercised");
    check(m_ignored_start > 0,    "ignored start exercised");
    check(m_multi_stop > 0,       "multi-stop exercised");
    check(m_autorestart > 0,      "auto-restart exercised");
    check(m_upload_nmeas > 0,     "upload by count exercised");
    check(m_upload_full > 0,      "upload by full buffer exercised");
    check(m_ignored_in_upload > 0, "trigger during upload exercised");
    check(m_saturate > 0,         "stopwatch saturation exercised");
    $display("mechanisms: idle_stop=%0d ignored_start=%0d multi_stop=%0d auto_restart=%0d upload_count=%0d upload_full=%0d ignored_in_upload=%0d saturate_cycles=%0d",
             m_idle_stop, m_ignored_start, m_multi_stop, m_autorestart, m_upload_nmeas,
             m_upload_full, m_ignored_in_upload, m_saturate);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
