// tb_lbist_ctrl: runs the controller against two model clock gating blocks that
// answer each request after a few cycles of their own clocks and log the command.
// Checks the command sequence of a session (INIT both, SHIFT both with the MISRs
// off, then per pattern CAPT 1, CAPT 2, SHIFT both with the MISRs on), the level of
// SE at every command (high for INIT/SHIFT, low for CAPT), the d1, d3 and d5 gaps in
// controller cycles, init only during INIT, finish/result for matching and for
// mismatching signatures, and that a second start runs a second session.
module tb_lbist_ctrl;
  import lbist_pkg::*;
  logic clk = 0, ck2 = 0, rst_n = 0, start = 0;
  logic [15:0] num_patterns = 16'd3, shift_len_in = 16'd5;
  logic [7:0] d1 = 8'd6, d3 = 8'd9, d5 = 8'd7;
  logic [117:0] golden, sig;
  logic [1:0] req, ack;
  gate_cmd_e cmd;
  logic [15:0] shift_len;
  logic init, misr_en, se, busy, finish, result;
  int checks = 0, failures = 0;

  lbist_ctrl dut (.clk(clk), .rst_n(rst_n), .start(start), .num_patterns(num_patterns),
    .shift_len_in(shift_len_in), .d1(d1), .d3(d3), .d5(d5), .golden(golden),
    .sig(sig), .req(req), .cmd(cmd), .shift_len(shift_len), .ack(ack),
    .init(init), .misr_en(misr_en), .se(se), .busy(busy), .finish(finish), .result(result));

  always #5 clk = ~clk;
  always #7 ck2 = ~ck2;

  int cyc = 0;
  always @(posedge clk) cyc++;

  typedef struct { int dom; gate_cmd_e c; logic se; logic men; logic ini; int t_req; int t_ack; } ev_t;
  ev_t log_q [$];
  int last_se_fall, last_se_rise;
  logic se_d = 0;
  always @(posedge clk) begin
    if (se_d && !se) last_se_fall = cyc;
    if (!se_d && se) last_se_rise = cyc;
    se_d <= se;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // model gating block n: answers after 3 + a few cycles of its clock
  for (genvar n = 0; n < 2; n++) begin : g_resp
    initial begin
      ack[n] = 0;
      wait (rst_n);
      forever begin
        ev_t e;
        if (n == 0) @(posedge clk iff req[n]); else @(posedge ck2 iff req[n]);
        e.dom = n + 1; e.c = cmd; e.se = se; e.men = misr_en; e.ini = init; e.t_req = cyc;
        repeat (3 + (e.c == CMD_SHIFT ? int'(shift_len) : 2)) if (n == 0) @(posedge clk); else @(posedge ck2);
        check(cmd == e.c && se == e.se, "cmd and se stable during burst");
        ack[n] = 1;
        e.t_ack = cyc;
        log_q.push_back(e);
        if (n == 0) @(posedge clk iff !req[n]); else @(posedge ck2 iff !req[n]);
        ack[n] = 0;
      end
    end
  end

  initial begin
    #2000000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic session(input bit match);
    int k, np, t_capt2_ack, t_capt1_ack;
    ev_t e;
    log_q.delete();
    golden = 118'({$urandom, $urandom, $urandom, $urandom});
    sig = match ? golden : golden ^ (118'(1) << 107);
    @(negedge clk); start = 1;
    repeat (5) @(negedge clk); start = 0;
    check(busy, "busy during session");
    check(!finish, "finish low during session");
    wait (finish);
    repeat (2) @(negedge clk);
    check(result == match, $sformatf("result %0d, expected %0d", result, match));
    check(!busy, "busy low at end");
    // sequence
    np = int'(num_patterns);
    check(log_q.size() == 2 + 2 + 4 * np, $sformatf("%0d commands logged", log_q.size()));
    k = 0;
    for (int i = 0; i < 2; i++) begin
      e = log_q[k++]; check(e.c == CMD_INIT && e.se && e.ini, "INIT with se high, init high");
    end
    for (int i = 0; i < 2; i++) begin
      e = log_q[k++]; check(e.c == CMD_SHIFT && e.se && !e.men && !e.ini, "first SHIFT, MISR off");
    end
    for (int p = 0; p < np && k + 3 < log_q.size(); p++) begin
      e = log_q[k++];
      check(e.c == CMD_CAPT && e.dom == 1 && !e.se, $sformatf("pattern %0d: CAPT domain 1 with se low", p));
      t_capt1_ack = e.t_ack;
      e = log_q[k++];
      check(e.c == CMD_CAPT && e.dom == 2 && !e.se, $sformatf("pattern %0d: CAPT domain 2 with se low", p));
      check(e.t_req - t_capt1_ack >= int'(d3), $sformatf("d3 gap %0d", e.t_req - t_capt1_ack));
      t_capt2_ack = e.t_ack;
      for (int i = 0; i < 2; i++) begin
        e = log_q[k++];
        check(e.c == CMD_SHIFT && e.se && e.men, $sformatf("pattern %0d: SHIFT, se high, MISR on", p));
        check(e.t_req - t_capt2_ack >= int'(d5), $sformatf("d5 gap %0d", e.t_req - t_capt2_ack));
      end
    end
  endtask

  // d1: the first capture request comes at least d1 cycles after SE falls
  always @(posedge clk) if (rst_n && req[0] && !$past(req[0]) && cmd == CMD_CAPT) begin
    checks++;
    if (cyc - last_se_fall < int'(d1)) begin failures++; $display("FAIL: d1 gap %0d", cyc - last_se_fall); end
  end

  initial begin
    #23 rst_n = 1;
    repeat (3) @(negedge clk);
    check(!busy && !finish && !se, "idle after reset");
    session(1);
    num_patterns = 16'd2;
    session(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
