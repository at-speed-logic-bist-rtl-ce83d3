// tb_lbist_top: end-to-end test of the BIST wrapper with a small two-domain core
// model (6 + 2 chains of 5 cells, so domain 1 uses a 6 -> 4 space compactor) and
// clocks of different frequencies (CK1 period 10, CK2 period 16).
//
// Everything goes through the pins: the configuration is written and the
// signatures are read through the TAP, sessions are started with start and
// judged from finish/result. The expected signatures come from the reference
// model lbist_ref, which replays a session bit by bit.
//
// Mechanisms exercised and counted (each must occur at least once):
//   functional clocking (tck follows ck outside a session), shift windows of
//   shift_len pulses per domain, capture pairs per domain one functional period
//   apart, domain 2's pair after domain 1's, SE low during capture and high during
//   shift, a passing session, a failing session (fault in the core), top-up mode,
//   TAP configuration writes and status reads.
module tb_lbist_top;
  import lbist_ref_pkg::*;
  localparam int ND = 2, N1 = 6, N2 = 2, NT = N1 + N2, L = 5, PL = 19, W1 = 4, W2 = 5, SW = W1 + W2, NP = 6;
  localparam int GW = 8;
  localparam time P1 = 10, P2 = 16;
  localparam int CFG_W = 1 + 3 * GW + 16 + 16 + SW + ND * PL;
  localparam int STAT_W = 3 + SW;

  logic [ND-1:0] ck = '0, tckd;
  logic rst_n = 1, start = 0, finish, result;
  logic jtck = 0, tsm = 1, tdi = 0, tdo;
  logic tck1, tck2, se, test_mode, fault = 0;
  logic [NT-1:0] si, so, ext = '0;
  int checks = 0, failures = 0;

  lbist_top #(.N_DOM(ND), .N_CH('{N1, N2}), .MISR_W('{W1, W2}), .CHAIN_LEN(L), .PRPG_LEN(PL),
              .NUM_PATTERNS(NP), .D1(3), .D3(2), .D5(3), .TOT_CH(NT), .SIG_W(SW)) dut (
    .ck(ck), .rst_n(rst_n), .start(start), .finish(finish), .result(result),
    .tck(jtck), .tsm(tsm), .tdi(tdi), .tdo(tdo),
    .tck_d(tckd), .se(se), .test_mode(test_mode),
    .scan_in(si), .scan_out(so), .ext_si(ext));

  lbist_core_model #(.N_DOM(ND), .N_CH('{N1, N2}), .L(L), .TOT_CH(NT)) core (
    .tck(tckd), .se(se), .fault(fault), .si(si), .so(so));

  assign tck1 = tckd[0];
  assign tck2 = tckd[1];
  always #(P1/2) ck[0] = ~ck[0];
  always #(P2/2) ck[1] = ~ck[1];

  lbist_ref rm = new(ND, '{N1, N2}, '{W1, W2}, L);
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #5000000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------------------------------------------------------- monitors
  int n_func = 0, n_shift_win = 0, n_capt_pair1 = 0, n_capt_pair2 = 0;
  int sh1 = 0, sh2 = 0;
  time c1 [$], c2 [$];
  always @(posedge tck1) if (!test_mode) n_func++;
  always @(posedge tck1) if (test_mode) begin if (se) sh1++; else c1.push_back($time); end
  always @(posedge tck2) if (test_mode) begin if (se) sh2++; else c2.push_back($time); end
  // end of a shift window: SE falls
  bit in_capt = 0;
  always @(negedge se) if (test_mode) begin
    in_capt = 1;
    check(sh1 == L && sh2 == L, $sformatf("shift window: %0d / %0d pulses, expected %0d", sh1, sh2, L));
    n_shift_win++; sh1 = 0; sh2 = 0;
  end
  // end of a capture window: SE rises
  always @(posedge se) if (test_mode && in_capt) begin
    in_capt = 0;
    check(c1.size() == 2 && c2.size() == 2, $sformatf("capture window: %0d / %0d pulses", c1.size(), c2.size()));
    if (c1.size() == 2) begin
      check(c1[1] - c1[0] == P1, "C1 -> C2 is one CK1 period");
      n_capt_pair1++;
    end
    if (c2.size() == 2) begin
      check(c2[1] - c2[0] == P2, "C3 -> C4 is one CK2 period");
      n_capt_pair2++;
    end
    if (c1.size() == 2 && c2.size() == 2) check(c2[0] > c1[1], "domain 2 captures after domain 1");
    c1.delete(); c2.delete();
  end

  typedef struct {
    logic [PL-1:0] seed1, seed2;
    logic [SW-1:0] golden;
    int np;
    logic topup;
  } conf_t;

  task automatic ref_session(input conf_t cf, input logic flt, output logic [SW-1:0] sig);
    bit [4095:0] s;
    bit e[];
    e = new[NT];
    foreach (e[i]) e[i] = ext[i];
    rm = new(ND, '{N1, N2}, '{W1, W2}, L);
    rm.run('{cf.seed1, cf.seed2}, cf.np, cf.topup, e, flt, s);
    sig = s[SW-1:0];
  endtask

  // ---------------------------------------------------------------- TAP access
  int n_cfg_write = 0, n_stat_read = 0;
  task automatic jclk(input logic m, input logic i, output logic o);
    tsm = m; tdi = i;
    #20 o = tdo; jtck = 1; #20 jtck = 0;
  endtask
  task automatic shift_ir(input logic [3:0] v);
    logic b;
    jclk(1, 0, b); jclk(1, 0, b); jclk(0, 0, b); jclk(0, 0, b);
    for (int i = 0; i < 4; i++) jclk(i == 3, v[i], b);
    jclk(1, 0, b); jclk(0, 0, b);
  endtask
  task automatic shift_dr(input int n, input logic [CFG_W-1:0] v, output logic [CFG_W-1:0] o);
    logic b;
    o = '0;
    jclk(1, 0, b); jclk(0, 0, b); jclk(0, 0, b);
    for (int i = 0; i < n; i++) begin jclk(i == n - 1, v[i], b); o[i] = b; end
    jclk(1, 0, b); jclk(0, 0, b);
  endtask
  task automatic write_cfg(input conf_t cf);
    logic [CFG_W-1:0] v, o;
    v = {cf.topup, GW'(3), GW'(2), GW'(3), 16'(L), 16'(cf.np), cf.golden, cf.seed2, cf.seed1};
    shift_ir(4'b0001);
    shift_dr(CFG_W, v, o);
    shift_dr(CFG_W, v, o);  // read back
    check(o == v, "configuration read back through the TAP");
    n_cfg_write++;
  endtask
  task automatic read_stat(output logic [SW-1:0] sg, output logic fin, output logic res);
    logic [CFG_W-1:0] o;
    shift_ir(4'b0010);
    shift_dr(STAT_W, '0, o);
    sg = o[SW-1:0]; res = o[SW+1]; fin = o[SW+2];
    n_stat_read++;
  endtask

  // ---------------------------------------------------------------- sessions
  int n_pass = 0, n_fail = 0, n_topup = 0;
  task automatic run_session(input conf_t cf, input logic exp_result, input string name);
    logic [SW-1:0] e, sg;
    logic fin, res;
    int cyc;
    write_cfg(cf);
    ref_session(cf, fault, e);
    @(negedge ck[0]); start = 1;
    repeat (4) @(negedge ck[0]); start = 0;
    cyc = 0;
    while (!finish && cyc < 100000) begin @(negedge ck[0]); cyc++; end
    check(finish, {name, ": finish"});
    check(result == exp_result, $sformatf("%s: result %0d, expected %0d", name, result, exp_result));
    check(sh1 == L && sh2 == L, $sformatf("%s: last shift window %0d / %0d pulses", name, sh1, sh2));
    sh1 = 0; sh2 = 0;
    read_stat(sg, fin, res);
    check(fin && res == exp_result, {name, ": status finish/result"});
    check(sg[W1-1:0] == e[W1-1:0], $sformatf("%s: signature 1 %h, reference %h", name, sg[W1-1:0], e[W1-1:0]));
    check(sg[SW-1:W1] == e[SW-1:W1], $sformatf("%s: signature 2 %h, reference %h", name, sg[SW-1:W1], e[SW-1:W1]));
    if (res) n_pass++; else n_fail++;
    if (cf.topup) n_topup++;
    $display("%s: signature %h result %0d (%0d CK1 cycles)", name, sg, res, cyc);
  endtask

  initial begin
    conf_t cf;
    logic [SW-1:0] e;
    #3 rst_n = 0;
    #30 rst_n = 1;
    begin logic b; jclk(0, 0, b); end  // Test-Logic-Reset -> Run-Test/Idle
    repeat (20) @(negedge ck[0]);
    check(n_func >= 19, $sformatf("functional mode: %0d tck1 pulses in 20 cycles", n_func));

    cf.seed1 = 19'h3A5C1; cf.seed2 = 19'h0F00D; cf.golden = '0; cf.np = NP; cf.topup = 0;
    ref_session(cf, 1'b0, e);
    // golden = reference signature: pass
    cf.golden = e;
    run_session(cf, 1'b1, "good core");
    // fault in the core: fail
    fault = 1;
    ref_session(cf, 1'b1, e);
    check(e != cf.golden, "reference: fault changes the signature");
    run_session(cf, 1'b0, "faulty core");
    fault = 0;
    // other seeds and pattern count, wrong golden: fail
    cf.seed1 = 19'h12345; cf.seed2 = 19'h54321; cf.np = 3; cf.golden = '0;
    ref_session(cf, 1'b0, e);
    run_session(cf, (e == 0), "second seeds");
    // top-up mode: chains loaded from the external scan inputs
    ext = 8'b10_101101; cf.topup = 1; cf.np = 2;
    ref_session(cf, 1'b0, e);
    cf.golden = e;
    run_session(cf, 1'b1, "top-up");
    // back to functional clocking
    n_func = 0;
    repeat (10) @(negedge ck[0]);
    check(n_func >= 9, "functional mode after sessions");

    check(n_shift_win > 0, "mechanism: shift windows");
    check(n_capt_pair1 > 0, "mechanism: domain-1 double capture");
    check(n_capt_pair2 > 0, "mechanism: domain-2 double capture");
    check(n_pass > 0, "mechanism: passing session");
    check(n_fail > 0, "mechanism: failing session");
    check(n_topup > 0, "mechanism: top-up mode");
    check(n_cfg_write > 0 && n_stat_read > 0, "mechanism: TAP write and read");
    $display("mechanisms: shift windows %0d, capture pairs %0d / %0d, pass %0d, fail %0d, top-up %0d, TAP writes %0d, reads %0d",
             n_shift_win, n_capt_pair1, n_capt_pair2, n_pass, n_fail, n_topup, n_cfg_write, n_stat_read);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
