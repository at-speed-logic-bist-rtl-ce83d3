// tb_lbist_misr: checks the MISR against a reference model written out with the taps
// of x^19+x^6+x^2+x+1 (19 bits, 19 inputs) and of x^8+x^6+x^5+x^4+1 (8 bits, 3
// inputs into the low stages): clear, hold with en low, compression of random data,
// and that a single flipped input bit changes the final signature.
module tb_lbist_misr;
  logic clk = 0, rst_n = 0, init = 0, en = 0;
  logic [18:0] d19, sig19, ref19;
  logic [2:0]  d3;
  logic [7:0]  sig8, ref8;
  int checks = 0, failures = 0;

  lbist_misr #(.WIDTH(19), .N_IN(19)) dut19 (.clk(clk), .rst_n(rst_n), .init(init), .en(en), .d(d19), .sig(sig19));
  lbist_misr #(.WIDTH(8),  .N_IN(3))  dut8  (.clk(clk), .rst_n(rst_n), .init(init), .en(en), .d(d3),  .sig(sig8));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #1000000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run(input int n, input int flip_at, output logic [18:0] s19);
    @(negedge clk); init = 1; en = 0;
    @(negedge clk); init = 0; en = 1;
    check(sig19 == 0 && sig8 == 0, "cleared");
    ref19 = 0; ref8 = 0;
    void'($urandom(77));
    for (int i = 0; i < n; i++) begin
      d19 = 19'($urandom); d3 = 3'($urandom);
      if (i == flip_at) d19[7] = ~d19[7];
      @(negedge clk);
      ref19 = {ref19[17:0], ref19[18] ^ ref19[5] ^ ref19[1] ^ ref19[0]} ^ d19;
      ref8  = {ref8[6:0],  ref8[7] ^ ref8[5] ^ ref8[4] ^ ref8[3]} ^ {5'd0, d3};
      check(sig19 == ref19, $sformatf("sig19 cycle %0d", i));
      check(sig8 == ref8, $sformatf("sig8 cycle %0d", i));
    end
    en = 0; d19 = '1; d3 = '1;
    repeat (3) @(negedge clk);
    check(sig19 == ref19 && sig8 == ref8, "hold with en low");
    s19 = sig19;
  endtask

  initial begin
    logic [18:0] a, b;
    d19 = 0; d3 = 0;
    #12 rst_n = 1;
    check(sig19 == 0, "reset");
    run(200, -1, a);
    run(200, 150, b);
    check(a != b, "single-bit error changes signature");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
