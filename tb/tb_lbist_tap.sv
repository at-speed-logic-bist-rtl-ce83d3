// tb_lbist_tap: drives the TAP pins as a tester would. Checks the reset
// configuration, a write and read-back through CONFIG, the STATUS capture, the
// 1-cycle BYPASS path, the captured instruction pattern, and that five tck cycles
// with tms high return the TAP to BYPASS without disturbing cfg.
module tb_lbist_tap;
  localparam int CW = 40, SW = 12;
  localparam logic [CW-1:0] RST = 40'hA5_1234_5678;
  logic tck = 0, tms = 1, tdi = 0, rst_n = 1, tdo;
  logic [CW-1:0] cfg;
  logic [SW-1:0] stat;
  int checks = 0, failures = 0;

  lbist_tap #(.CFG_W(CW), .STAT_W(SW), .CFG_RESET(RST)) dut (
    .tck(tck), .tms(tms), .tdi(tdi), .rst_n(rst_n), .tdo(tdo), .cfg(cfg), .stat(stat));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #1000000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // one tck cycle; tdo is sampled just before the rising edge
  task automatic clk1(input logic m, input logic i, output logic o);
    tms = m; tdi = i;
    #5 o = tdo; tck = 1; #5 tck = 0;
  endtask

  task automatic shift_ir(input logic [3:0] v, output logic [3:0] o);
    logic b;
    clk1(1, 0, b); clk1(1, 0, b); clk1(0, 0, b); clk1(0, 0, b);  // RTI->SelDR->SelIR->CapIR->ShIR
    for (int i = 0; i < 4; i++) begin clk1(i == 3, v[i], b); o[i] = b; end
    clk1(1, 0, b); clk1(0, 0, b);                                  // Exit1->Update->RTI
  endtask

  task automatic shift_dr(input int n, input logic [63:0] v, output logic [63:0] o);
    logic b;
    o = '0;
    clk1(1, 0, b); clk1(0, 0, b); clk1(0, 0, b);                   // RTI->SelDR->CapDR->ShDR
    for (int i = 0; i < n; i++) begin clk1(i == n - 1, v[i], b); o[i] = b; end
    clk1(1, 0, b); clk1(0, 0, b);
  endtask

  initial begin
    logic [63:0] o;
    logic [3:0]  iro;
    logic b;
    stat = 12'hC3A;
    #1 rst_n = 0;
    #2 rst_n = 1;
    check(cfg == RST, "reset configuration");
    clk1(0, 0, b);  // TLR -> RTI
    // CONFIG read-back of reset value while writing a new one
    shift_ir(4'b0001, iro);
    check(iro == 4'b0001, "captured IR pattern");
    shift_dr(CW, 64'h00C0_FFEE_1234, o);
    check(o[CW-1:0] == RST, "CONFIG captures current cfg");
    check(cfg == 40'hC0_FFEE_1234, $sformatf("CONFIG update: %h", cfg));
    shift_dr(CW, 64'h0, o);
    check(o[CW-1:0] == 40'hC0_FFEE_1234, "CONFIG read back");
    check(cfg == 40'h0, "CONFIG second update");
    // STATUS
    shift_ir(4'b0010, iro);
    shift_dr(SW, 64'hFFF, o);
    check(o[SW-1:0] == 12'hC3A, "STATUS capture");
    check(cfg == 40'h0, "STATUS does not write cfg");
    stat = 12'h5C5;
    shift_dr(SW, 64'h0, o);
    check(o[SW-1:0] == 12'h5C5, "STATUS capture 2");
    // BYPASS: one-bit delay
    shift_ir(4'b1111, iro);
    shift_dr(8, 64'hB6, o);
    check(o[7:0] == 8'h6C, $sformatf("BYPASS delay: %h", o[7:0]));
    // reset by tms, then DR scan goes through bypass
    shift_ir(4'b0001, iro);
    for (int i = 0; i < 5; i++) clk1(1, 0, b);
    clk1(0, 0, b);
    shift_dr(8, 64'h01, o);
    check(o[7:0] == 8'h02, "TMS reset selects BYPASS");
    check(cfg == 40'h0, "TMS reset keeps cfg");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
