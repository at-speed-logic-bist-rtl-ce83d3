// tb_lbist_top_full: one complete self-test session of the wrapper at its default
// size (core X of the paper: 99 + 1 chains of 104 cells, 19-bit PRPGs, 99- and
// 19-bit MISRs, 20000 random patterns) on a core model of that size, with CK1 at
// period 10 and CK2 at period 12.
//
// The configuration stays at its reset values except the golden signatures, which
// the reference model lbist_ref computes beforehand by replaying the session bit
// by bit and which are then written through the TAP. The session must end with
// finish and a passing result, the signatures read through the TAP must equal the
// reference, and the session length must be what the sequencing implies: 20000
// capture windows and 20001 shift windows of 104 pulses in each domain.
module tb_lbist_top_full;
  import lbist_ref_pkg::*;
  localparam int N1 = 99, N2 = 1, NT = 100, L = 104, PL = 19, W1 = 99, W2 = 19, SW = 118, NP = 20000;
  localparam int GW = 8;
  localparam time P1 = 10, P2 = 12;
  localparam int CFG_W = 1 + 3 * GW + 16 + 16 + SW + 2 * PL;
  localparam int STAT_W = 3 + SW;
  // the wrapper's reset seeds: SEED_BASE for domain 1, SEED_BASE ^ 19'h36A75 for domain 2
  localparam logic [PL-1:0] SEED1 = 19'h2B5A1, SEED2 = 19'h2B5A1 ^ 19'h36A75;

  logic [1:0] ck = '0, tckd;
  logic rst_n = 1, start = 0, finish, result;
  logic jtck = 0, tsm = 1, tdi = 0, tdo;
  logic se, test_mode;
  logic [NT-1:0] si, so;
  int checks = 0, failures = 0;

  lbist_top dut (
    .ck(ck), .rst_n(rst_n), .start(start), .finish(finish), .result(result),
    .tck(jtck), .tsm(tsm), .tdi(tdi), .tdo(tdo),
    .tck_d(tckd), .se(se), .test_mode(test_mode),
    .scan_in(si), .scan_out(so), .ext_si('0));

  lbist_core_model #(.N_DOM(2), .N_CH('{N1, N2}), .L(L), .TOT_CH(NT)) core (
    .tck(tckd), .se(se), .fault(1'b0), .si(si), .so(so));

  always #(P1/2) ck[0] = ~ck[0];
  always #(P2/2) ck[1] = ~ck[1];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #400ms;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  lbist_ref rm;

  // pulse counts
  longint n_shift1 = 0, n_shift2 = 0, n_capt1 = 0, n_capt2 = 0, n_capt_win = 0;
  always @(posedge tckd[0]) if (test_mode) begin if (se) n_shift1++; else n_capt1++; end
  always @(posedge tckd[1]) if (test_mode) begin if (se) n_shift2++; else n_capt2++; end
  always @(negedge se) if (test_mode) n_capt_win++;

  // ---------------------------------------------------------------- TAP access
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

  initial begin
    logic [W1-1:0] e1;
    logic [W2-1:0] e2;
    logic [CFG_W-1:0] v, o;
    bit [4095:0] rs;
    bit ext[];
    logic b;
    longint cyc;
    #3 rst_n = 0;
    #30 rst_n = 1;
    jclk(0, 0, b);
    rm = new(2, '{N1, N2}, '{W1, W2}, L);
    ext = new[NT];
    rm.run('{SEED1, SEED2}, NP, 1'b0, ext, 1'b0, rs);
    e1 = rs[W1-1:0]; e2 = rs[W1 +: W2];
    $display("reference signatures: %h / %h", e1, e2);
    // read the reset configuration, replace the golden signatures, write it back
    shift_ir(4'b0001);
    shift_dr(CFG_W, '0, o);
    check(o[PL-1:0] == SEED1 && o[PL +: PL] == SEED2, "reset seeds");
    check(o[2*PL+SW +: 16] == 16'(NP), "reset pattern count");
    check(o[2*PL+SW+16 +: 16] == 16'(L), "reset shift length");
    v = o;
    v[2*PL +: SW] = {e2, e1};
    shift_dr(CFG_W, v, o);
    shift_dr(CFG_W, v, o);
    check(o == v, "configuration written");
    // session
    @(negedge ck[0]); start = 1;
    repeat (4) @(negedge ck[0]); start = 0;
    cyc = 0;
    while (!finish && cyc < 20000000) begin @(negedge ck[0]); cyc++; end
    check(finish, "finish");
    check(result, "result: pass");
    shift_ir(4'b0010);
    shift_dr(STAT_W, '0, o);
    check(o[W1-1:0] == e1, $sformatf("signature 1 %h, reference %h", o[W1-1:0], e1));
    check(o[W1 +: W2] == e2, $sformatf("signature 2 %h, reference %h", o[W1 +: W2], e2));
    check(n_capt_win == longint'(NP), $sformatf("%0d capture windows", n_capt_win));
    check(n_capt1 == longint'(2 * NP) && n_capt2 == longint'(2 * NP), $sformatf("capture pulses %0d / %0d", n_capt1, n_capt2));
    check(n_shift1 == longint'(NP + 1) * longint'(L) && n_shift2 == longint'(NP + 1) * longint'(L),
          $sformatf("shift pulses %0d / %0d", n_shift1, n_shift2));
    $display("session: %0d CK1 cycles, %0.1f per pattern", cyc, real'(cyc) / NP);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
