// tb_lbist_spc: checks the space compactor 16 -> 5 (output k = XOR of inputs
// k, k+5, k+10, k+15) with random vectors, that a single-bit error always shows,
// and the no-compaction case 3 -> 5 (inputs on the low outputs, 0 above).
module tb_lbist_spc;
  logic [15:0] d16;
  logic [4:0]  q5;
  logic [2:0]  d3;
  logic [4:0]  q3;
  int checks = 0, failures = 0;

  lbist_spc #(.N_IN(16), .N_OUT(5)) dut  (.d(d16), .q(q5));
  lbist_spc #(.N_IN(3),  .N_OUT(5)) dut3 (.d(d3),  .q(q3));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [4:0] e, q0;
    for (int t = 0; t < 200; t++) begin
      d16 = 16'($urandom); d3 = 3'($urandom);
      #1;
      e[0] = d16[0] ^ d16[5] ^ d16[10] ^ d16[15];
      e[1] = d16[1] ^ d16[6] ^ d16[11];
      e[2] = d16[2] ^ d16[7] ^ d16[12];
      e[3] = d16[3] ^ d16[8] ^ d16[13];
      e[4] = d16[4] ^ d16[9] ^ d16[14];
      check(q5 == e, $sformatf("compaction vector %0d", t));
      check(q3 == {2'b00, d3}, $sformatf("identity vector %0d", t));
      q0 = q5;
      d16[t % 16] = ~d16[t % 16];
      #1 check($countones(q5 ^ q0) == 1, "single-bit error visible");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
