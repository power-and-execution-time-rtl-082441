// tb_pbus_decoder: random and directed command words into one P-bus
// decoder. The expected decoded command is computed here from the word
// layout (opcode in bits 31:28, argument in 27:0) and compared one cycle
// after the beat, which is the decoder's fixed latency.
module tb_pbus_decoder;
  import meas_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic s_tvalid, s_tready;
  logic [31:0] s_tdata;
  cmd_t cmd;
  int checks = 0, failures = 0;

  pbus_decoder dut (.clk, .rst_n, .s_tvalid, .s_tready, .s_tdata, .cmd);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // independent expectation from the raw word
  function automatic void expect_of(logic v, logic [31:0] w,
                                    output logic e_start, output logic e_stop,
                                    output logic e_cfg, output logic [27:0] e_arg);
    logic [3:0] op = w[31:28];
    e_start = v && op == 4'h1;
    e_stop  = v && op == 4'h2;
    e_cfg   = v && (op == 4'h3 || op == 4'h4 || op == 4'h5);
    e_arg   = w[27:0];
  endfunction

  logic        pv;
  logic [31:0] pw;
  logic        e_start, e_stop, e_cfg;
  logic [27:0] e_arg;

  initial begin
    s_tvalid = 1'b0;
    s_tdata  = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    check(cmd.start == 0 && cmd.stop == 0 && cmd.cfg_valid == 0, "idle after reset");
    for (int i = 0; i < 600; i++) begin
      pv = ($urandom_range(0, 3) != 0);
      pw = {4'($urandom_range(0, 7)), 28'($urandom)};
      if (i < 6) begin pv = 1'b1; pw = {4'(i), 28'h0abcdef + 28'(i)}; end
      s_tvalid <= pv;
      s_tdata  <= pw;
      @(posedge clk);
      check(s_tready == 1'b1, "always ready");
      #1;
      expect_of(pv, pw, e_start, e_stop, e_cfg, e_arg);
      check(cmd.start == e_start, $sformatf("start word %h", pw));
      check(cmd.stop  == e_stop,  $sformatf("stop word %h", pw));
      check(cmd.cfg_valid == e_cfg, $sformatf("cfg word %h", pw));
      if (e_cfg) begin
        check(cmd.cfg_arg == e_arg, "cfg argument");
        check(4'(cmd.cfg_op) == pw[31:28], "cfg opcode");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
