// tb_lbist_clk_gate: checks one clock gating block. Outside test mode tck follows
// ck. In test mode, for each command it counts the pulses on tck and cck between
// req and ack: INIT gives 1 cck and 0 tck pulses, SHIFT gives shift_len of each,
// CAPT gives 2 tck and 0 cck pulses whose rising edges are exactly one ck period
// apart (at-speed launch and capture). It also checks the four-phase handshake and
// that no pulse is shorter than the high phase of ck.
module tb_lbist_clk_gate;
  import lbist_pkg::*;
  localparam time PER = 10;
  logic ck = 0, rst_n = 0, test_mode = 0, req = 0, ack, tck, cck;
  gate_cmd_e cmd = CMD_INIT;
  logic [15:0] shift_len = 16'd7;
  int checks = 0, failures = 0;
  int n_tck = 0, n_cck = 0;
  time t_tck [$];
  time t_rise;

  lbist_clk_gate dut (.ck(ck), .rst_n(rst_n), .test_mode(test_mode), .req(req), .cmd(cmd),
                      .shift_len(shift_len), .ack(ack), .tck(tck), .cck(cck));

  always #(PER/2) ck = ~ck;
  always @(posedge tck) begin n_tck++; t_tck.push_back($time); t_rise = $time; end
  always @(negedge tck) if (test_mode && $time - t_rise < PER/2) begin
    failures++; $display("FAIL: short tck pulse");
  end
  always @(posedge cck) n_cck++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #1000000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic do_cmd(input gate_cmd_e c, input int exp_tck, input int exp_cck);
    int cyc;
    @(negedge ck);
    cmd = c; n_tck = 0; n_cck = 0; t_tck.delete();
    req = 1;
    cyc = 0;
    while (!ack && cyc < 1000) begin @(negedge ck); cyc++; end
    check(ack, "ack rises");
    check(n_tck == exp_tck, $sformatf("cmd %s: %0d tck pulses, expected %0d", c.name(), n_tck, exp_tck));
    check(n_cck == exp_cck, $sformatf("cmd %s: %0d cck pulses, expected %0d", c.name(), n_cck, exp_cck));
    check(cyc <= exp_tck + exp_cck + 4, $sformatf("latency %0d cycles", cyc));
    if (c == CMD_CAPT && t_tck.size() == 2)
      check(t_tck[1] - t_tck[0] == PER, "capture pulses one ck period apart");
    if (c == CMD_SHIFT)
      for (int i = 1; i < t_tck.size(); i++) check(t_tck[i] - t_tck[i-1] == PER, "shift pulses back to back");
    repeat (3) @(negedge ck);
    check(ack, "ack held while req high");
    check(!tck && n_tck == exp_tck, "no extra pulses while waiting");
    req = 0;
    cyc = 0;
    while (ack && cyc < 10) begin @(negedge ck); cyc++; end
    check(!ack, "ack falls after req");
  endtask

  initial begin
    #22 rst_n = 1;
    @(negedge ck); n_tck = 0; n_cck = 0;
    repeat (10) @(negedge ck);
    check(n_tck == 10 && n_cck == 0, $sformatf("functional mode: %0d tck, %0d cck", n_tck, n_cck));
    test_mode = 1;
    @(negedge ck); n_tck = 0;
    repeat (5) @(negedge ck);
    check(n_tck == 0, "test mode idle: tck stopped");
    do_cmd(CMD_INIT, 0, 1);
    do_cmd(CMD_SHIFT, 7, 7);
    do_cmd(CMD_CAPT, 2, 0);
    shift_len = 16'd1;
    do_cmd(CMD_SHIFT, 1, 1);
    shift_len = 16'd104;
    do_cmd(CMD_SHIFT, 104, 104);
    do_cmd(CMD_CAPT, 2, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
