// tb_lbist_prpg: checks the 19-bit PRPG against a reference LFSR written out with
// its taps (19, 6, 2, 1), its reset and seed loading, and that its period is the
// maximal 2^19 - 1 steps.
module tb_lbist_prpg;
  localparam int LEN = 19;
  logic clk = 0, rst_n = 0, init = 0;
  logic [LEN-1:0] seed, state, ref_s;
  int checks = 0, failures = 0;

  lbist_prpg #(.LEN(LEN)) dut (.clk(clk), .rst_n(rst_n), .init(init), .seed(seed), .state(state));

  always #5 clk = ~clk;

  function automatic logic [LEN-1:0] step(input logic [LEN-1:0] s);
    return {s[17:0], s[18] ^ s[5] ^ s[1] ^ s[0]};
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int unsigned period;
    seed = 19'h2B5A1;
    #12 check(state == 19'd1, "reset value");
    rst_n = 1;
    @(negedge clk); init = 1;
    @(negedge clk); init = 0;
    check(state == seed, "seed loaded");
    ref_s = seed;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      ref_s = step(ref_s);
      if (state != ref_s) begin check(0, $sformatf("step %0d: %h != %h", i, state, ref_s)); break; end
      if (i % 100 == 0) check(1, "step");
    end
    // period: count steps until the seed comes back
    @(negedge clk); init = 1; @(negedge clk); init = 0;
    period = 0;
    do begin @(negedge clk); period++; end while (state != seed && period < 600000);
    check(period == (1 << LEN) - 1, $sformatf("period %0d", period));
    // a second seed
    seed = 19'h00001;
    @(negedge clk); init = 1; @(negedge clk); init = 0;
    check(state == 19'd1, "second seed");
    @(negedge clk); check(state == step(19'd1), "step from seed 1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
