// tb_mapping_workload: graph-level latency measurements of two dataflow
// graphs sharing four processors under seven actor-to-processor mappings,
// with the measurement system at its default sizes.
//
// Graphs: a Sobel filter (getPixel -> GX, GY -> ABS, 9 tokens into each
// gradient actor, 1 token into ABS) and a JPEG encoder chain
// (getMB -> CC -> DCT -> VLC, one macroblock token per channel). Each
// processor fires its actors in a fixed static order, one firing of each
// per iteration; the mapping table lists that order per processor. Sobel
// phase lengths follow the published Sobel 9x9 measurements; the JPEG phase
// lengths are placeholders of this testbench (only whole-iteration times
// are published for it).
//
// For every mapping, each graph is measured in turn at graph level: one
// START from the processor of its source actor before the loop, one STOP
// after every firing of its sink actor, auto-restart, num_meas = R. The
// values come back over the UART and are compared with the cycle stamps of
// the accepted start/stop beats; the power-trigger pulse lengths are
// checked too. A per-mapping latency summary is printed.
module tb_mapping_workload;
  import meas_pkg::*;
  localparam int N = 4, CPB = 868, R = 3, NA = 8, NCH = 7, NMAP = 7;

  // actors
  localparam int GETPIXEL = 0, GX = 1, GY = 2, ABS = 3, GETMB = 4, CC = 5, DCT = 6, VLC = 7;

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
  longint exp_val[$], got[$];
  int exp_trig[$], trig_len[$];
  int n_rx = 0;

  measurement_system dut (
    .clk, .rst_n, .s_tvalid, .s_tready, .s_tdata, .power_trigger, .uart_txd,
    .state, .cfg, .measuring, .sw_overflow, .buf_count, .buf_full, .meas_cnt);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (40_000_000) @(posedge clk);
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
    @(posedge clk);
  endtask

  initial begin : rx
    logic [7:0] b;
    logic [31:0] v;
    longint e;
    @(posedge rst_n);
    forever begin
      for (int k = 0; k < 4; k++) begin
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

  // ---- graph description ---------------------------------------------
  // phase lengths: read, compute, write
  int t_rd [NA] = '{0,     17664, 17664, 20126, 0,     5000,  5000,  5000};
  int t_cp [NA] = '{7949,  4575,  4575,  52,    20000, 30000, 60000, 40000};
  int t_wr [NA] = '{15079, 282,   282,   0,     5000,  5000,  5000,  0};
  // channels: 0 gP->GX, 1 gP->GY, 2 GX->ABS, 3 GY->ABS, 4 getMB->CC, 5 CC->DCT, 6 DCT->VLC
  int cap  [NCH] = '{9, 9, 1, 1, 1, 1, 1};
  int rate [NCH] = '{9, 9, 1, 1, 1, 1, 1};
  int tok  [NCH];

  // static-order schedules: map x tile x slot, -1 = empty
  int sched [NMAP][N][4] = '{
    '{'{GETPIXEL, GX, -1, -1},  '{GY, ABS, -1, -1},        '{GETMB, CC, -1, -1},  '{DCT, VLC, -1, -1}},
    '{'{GETPIXEL, GETMB, -1, -1}, '{GX, CC, -1, -1},       '{GY, DCT, -1, -1},    '{ABS, VLC, -1, -1}},
    '{'{GETPIXEL, ABS, -1, -1}, '{GX, GY, -1, -1},         '{GETMB, VLC, -1, -1}, '{CC, DCT, -1, -1}},
    '{'{GETPIXEL, GY, -1, -1},  '{GX, ABS, -1, -1},        '{GETMB, DCT, -1, -1}, '{CC, VLC, -1, -1}},
    '{'{GETPIXEL, CC, -1, -1},  '{GETMB, GX, -1, -1},      '{GY, VLC, -1, -1},    '{DCT, ABS, -1, -1}},
    '{'{GETPIXEL, DCT, -1, -1}, '{GETMB, GY, -1, -1},      '{GX, VLC, -1, -1},    '{CC, ABS, -1, -1}},
    '{'{GETMB, CC, DCT, VLC},   '{GETPIXEL, GX, GY, ABS},  '{-1, -1, -1, -1},     '{-1, -1, -1, -1}}
  };

  int src_actor, sink_actor, t_start;
  bit restarted;

  function automatic void ins(int a, output int c0, output int c1);
    c0 = -1; c1 = -1;
    case (a)
      GX: c0 = 0;  GY: c0 = 1;  ABS: begin c0 = 2; c1 = 3; end
      CC: c0 = 4;  DCT: c0 = 5; VLC: c0 = 6;
      default: ;
    endcase
  endfunction

  function automatic void outs(int a, output int c0, output int c1);
    c0 = -1; c1 = -1;
    case (a)
      GETPIXEL: begin c0 = 0; c1 = 1; end
      GX: c0 = 2;  GY: c0 = 3;
      GETMB: c0 = 4; CC: c0 = 5; DCT: c0 = 6;
      default: ;
    endcase
  endfunction

  task automatic fire(int tile, int a);
    int i0, i1, o0, o1, t;
    ins(a, i0, i1);
    outs(a, o0, o1);
    while ((i0 >= 0 && tok[i0] < rate[i0]) || (i1 >= 0 && tok[i1] < rate[i1])) @(posedge clk);
    repeat (t_rd[a]) @(posedge clk);
    if (i0 >= 0) tok[i0] -= rate[i0];
    if (i1 >= 0) tok[i1] -= rate[i1];
    repeat (t_cp[a]) @(posedge clk);
    if (a == sink_actor) begin
      send(tile, OP_STOP, 0, t);
      exp_val.push_back(longint'(t - t_start));
      exp_trig.push_back(restarted ? t - t_start - 1 : t - t_start);
      restarted = 1'b1;
      t_start = t;
    end
    while ((o0 >= 0 && tok[o0] + rate[o0] > cap[o0]) || (o1 >= 0 && tok[o1] + rate[o1] > cap[o1]))
      @(posedge clk);
    repeat (t_wr[a]) @(posedge clk);
    if (o0 >= 0) tok[o0] += rate[o0];
    if (o1 >= 0) tok[o1] += rate[o1];
  endtask

  task automatic run_tile(int mp, int tile);
    int t;
    for (int s = 0; s < 4; s++)
      if (sched[mp][tile][s] == src_actor) begin
        send(tile, OP_START, 0, t);      // start() before the processing loop
        t_start = t;
      end
    for (int it = 0; it < R; it++)
      for (int s = 0; s < 4; s++)
        if (sched[mp][tile][s] >= 0) fire(tile, sched[mp][tile][s]);
  endtask

  task automatic measure(int mp, int src, int sink, string name, output real avg);
    int t, first_rx;
    longint sum;
    src_actor = src; sink_actor = sink; restarted = 1'b0;
    foreach (tok[i]) tok[i] = 0;
    send(0, OP_SET_STOPS, 1, t);
    send(0, OP_SET_NMEAS, R, t);
    send(0, OP_SET_AUTORST, 1, t);
    repeat (2) @(posedge clk);
    first_rx = n_rx;
    got.delete();
    fork
      run_tile(mp, 0);
      run_tile(mp, 1);
      run_tile(mp, 2);
      run_tile(mp, 3);
    join
    wait (n_rx == first_rx + R && state == ST_IDLE);
    check(exp_val.size() == 0, {name, ": all values received"});
    check(trig_len.size() == exp_trig.size(), {name, ": trigger pulse count"});
    while (trig_len.size() != 0 && exp_trig.size() != 0)
      check(trig_len.pop_front() == exp_trig.pop_front(), {name, ": trigger pulse length"});
    trig_len.delete(); exp_trig.delete();
    sum = 0;
    foreach (got[i]) sum += got[i];
    avg = real'(sum) / R;
  endtask

  initial begin
    real a_sobel, a_jpeg;
    for (int i = 0; i < N; i++) begin s_tvalid[i] = 1'b0; s_tdata[i] = '0; end
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    repeat (3) @(posedge clk);
    for (int mp = 0; mp < NMAP; mp++) begin
      measure(mp, GETPIXEL, ABS, $sformatf("map %0d Sobel", mp + 1), a_sobel);
      measure(mp, GETMB, VLC, $sformatf("map %0d JPEG", mp + 1), a_jpeg);
      $display("map %0d: Sobel iteration avg %9.1f cycles, JPEG iteration avg %9.1f cycles",
               mp + 1, a_sobel, a_jpeg);
    end
    check(n_rx == 2 * NMAP * R, "all mappings uploaded");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
