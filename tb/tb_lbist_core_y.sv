// tb_lbist_core_y: the wrapper in the shape of core Y of the paper's applications:
// 8 clock domains with one PRPG-MISR pair each, 106 scan chains of 345 cells, one
// 80-bit MISR on the 80 chains of the main domain and 19-bit MISRs on the other
// seven domains (4, 4, 4, 4, 4, 3 and 3 chains), no space compaction, 19-bit PRPGs.
// The eight clocks all have different periods. The session runs 2000 of the 20K
// random patterns of the application, to keep the simulation short.
//
// Checks: the session passes with golden signatures from the reference model
// lbist_ref, the signatures read through the TAP equal the reference, every
// domain gets (patterns + 1) * 345 shift pulses and 2 capture pulses per pattern
// spaced by one period of its own clock, and in every capture window the domains
// capture one after the other in the order 1 .. 8.
module tb_lbist_core_y;
  import lbist_ref_pkg::*;
  localparam int ND = 8, NT = 106, L = 345, PL = 19, SW = 80 + 7 * 19, NP = 2000;
  localparam int GW = 8;
  localparam int CFG_W = 1 + 3 * GW + 16 + 16 + SW + ND * PL;
  localparam int STAT_W = 3 + SW;
  localparam int unsigned NCH [ND] = '{80, 4, 4, 4, 4, 4, 3, 3};
  localparam int unsigned MW  [ND] = '{80, 19, 19, 19, 19, 19, 19, 19};
  localparam int NCH_I [ND] = '{80, 4, 4, 4, 4, 4, 3, 3};
  localparam time PER [ND] = '{10, 12, 14, 16, 8, 18, 20, 22};

  logic [ND-1:0] ck = '0, tckd;
  logic rst_n = 1, start = 0, finish, result;
  logic jtck = 0, tsm = 1, tdi = 0, tdo;
  logic se, test_mode;
  logic [NT-1:0] si, so;
  int checks = 0, failures = 0;

  lbist_top #(.N_DOM(ND), .N_CH(NCH), .MISR_W(MW), .CHAIN_LEN(L), .TOT_CH(NT), .SIG_W(SW)) dut (
    .ck(ck), .rst_n(rst_n), .start(start), .finish(finish), .result(result),
    .tck(jtck), .tsm(tsm), .tdi(tdi), .tdo(tdo),
    .tck_d(tckd), .se(se), .test_mode(test_mode),
    .scan_in(si), .scan_out(so), .ext_si('0));

  lbist_core_model #(.N_DOM(ND), .N_CH(NCH_I), .L(L), .TOT_CH(NT)) core (
    .tck(tckd), .se(se), .fault(1'b0), .si(si), .so(so));

  for (genvar d = 0; d < ND; d++) begin : g_clk
    always #(PER[d] / 2) ck[d] = ~ck[d];
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #200ms;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // pulse monitors
  longint n_shift [ND], n_capt [ND];
  int bad_spacing = 0, bad_order = 0, last_dom = -1;
  time t_last [ND];
  initial foreach (n_shift[d]) begin n_shift[d] = 0; n_capt[d] = 0; end
  for (genvar d = 0; d < ND; d++) begin : g_mon
    always @(posedge tckd[d]) if (test_mode) begin
      if (se) n_shift[d]++;
      else begin
        n_capt[d]++;
        if (n_capt[d] % 2 == 0 && $time - t_last[d] != PER[d]) bad_spacing++;
        if (d < last_dom) bad_order++;
        last_dom = d;
        t_last[d] = $time;
      end
    end
  end
  always @(negedge se) last_dom = -1;

  // TAP access
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

  lbist_ref rm;

  initial begin
    logic [CFG_W-1:0] v, o;
    logic [SW-1:0] e;
    bit [4095:0] rs;
    bit [18:0] seeds [];
    bit ext [];
    logic b;
    int mw_i [];
    int nch_i [];
    #3 rst_n = 0;
    #30 rst_n = 1;
    jclk(0, 0, b);
    // reset configuration: seeds, then set pattern count and golden signature
    shift_ir(4'b0001);
    shift_dr(CFG_W, '0, o);
    v = o;
    seeds = new[ND];
    foreach (seeds[d]) seeds[d] = o[d*PL +: PL];
    check(o[ND*PL+SW+16 +: 16] == 16'(L), "reset shift length");
    nch_i = new[ND]; mw_i = new[ND];
    foreach (nch_i[d]) begin nch_i[d] = NCH[d]; mw_i[d] = MW[d]; end
    rm = new(ND, nch_i, mw_i, L);
    ext = new[NT];
    rm.run(seeds, NP, 1'b0, ext, 1'b0, rs);
    e = rs[SW-1:0];
    v[ND*PL +: SW] = e;
    v[ND*PL+SW +: 16] = 16'(NP);
    shift_dr(CFG_W, v, o);
    shift_dr(CFG_W, v, o);
    check(o == v, "configuration written");
    @(negedge ck[0]); start = 1;
    repeat (4) @(negedge ck[0]); start = 0;
    wait (finish);
    check(result, "result: pass");
    shift_ir(4'b0010);
    shift_dr(STAT_W, '0, o);
    check(o[SW-1:0] == e, "signatures equal the reference");
    for (int d = 0; d < ND; d++) begin
      check(n_shift[d] == longint'(NP + 1) * longint'(L), $sformatf("domain %0d: %0d shift pulses", d + 1, n_shift[d]));
      check(n_capt[d] == longint'(2 * NP), $sformatf("domain %0d: %0d capture pulses", d + 1, n_capt[d]));
    end
    check(bad_spacing == 0, $sformatf("%0d capture pairs not one period apart", bad_spacing));
    check(bad_order == 0, $sformatf("%0d capture windows out of domain order", bad_order));
    $display("core Y shape: %0d patterns, signature %h", NP, o[SW-1:0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
