// tb_lbist_ps_spe: checks the phase shifter / space expander (19 -> 99). For every
// output it finds, by flipping one PRPG bit at a time, which stages it depends on,
// and checks that these are exactly the three distinct stages of the tap formula
// (a = j mod 19, b = a+1+((3j+2) mod 18), c = a+1+((5j+7) mod 18), all mod 19,
// c moved on by one while it collides with b or a), and that no output is a copy of
// its neighbour's taps shifted by one stage. Random vectors then check the XOR.
module tb_lbist_ps_spe;
  localparam int LEN = 19, N = 99;
  logic [LEN-1:0] prpg;
  logic [N-1:0]   out;
  int checks = 0, failures = 0;

  lbist_ps_spe #(.LEN(LEN), .N_OUT(N)) dut (.prpg(prpg), .out(out));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #1000000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [LEN-1:0] dep [N];
  logic [LEN-1:0] expm [N];

  initial begin
    logic [N-1:0] base;
    int a, b, c;
    for (int j = 0; j < N; j++) begin
      a = j % LEN;
      b = (a + 1 + ((3 * j + 2) % (LEN - 1))) % LEN;
      c = (a + 1 + ((5 * j + 7) % (LEN - 1))) % LEN;
      if (c == b) c = (b + 1) % LEN;
      if (c == a) c = (c + 1) % LEN;
      expm[j] = '0; expm[j][a] = 1; expm[j][b] = 1; expm[j][c] = 1;
    end
    prpg = '0; #1 base = out;
    check(base == '0, "zero in, zero out");
    for (int k = 0; k < LEN; k++) begin
      prpg = '0; prpg[k] = 1'b1; #1;
      for (int j = 0; j < N; j++) dep[j][k] = out[j];
    end
    for (int j = 0; j < N; j++) begin
      check($countones(dep[j]) == 3, $sformatf("output %0d depends on %0d stages", j, $countones(dep[j])));
      check(dep[j] == expm[j], $sformatf("output %0d taps %h != %h", j, dep[j], expm[j]));
      if (j > 0) check(dep[j] != {dep[j-1][LEN-2:0], 1'b0} && dep[j] != {1'b0, dep[j-1][LEN-1:1]},
                       $sformatf("output %0d is a shifted copy", j));
    end
    for (int t = 0; t < 200; t++) begin
      logic [N-1:0] e;
      prpg = LEN'($urandom);
      #1;
      for (int j = 0; j < N; j++) e[j] = ^(prpg & expm[j]);
      check(out == e, $sformatf("random vector %0d", t));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
