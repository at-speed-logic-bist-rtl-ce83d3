// tb_lbist_retime: checks that the re-timing flip-flops take their input on the
// falling clock edge only: a value changed right after a rising edge (as the PRPG
// output does) is not seen at that rising edge, and appears after the falling edge.
module tb_lbist_retime;
  localparam int W = 8;
  logic clk = 0;
  logic [W-1:0] d, q;
  int checks = 0, failures = 0;

  lbist_retime #(.WIDTH(W)) dut (.clk(clk), .d(d), .q(q));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [W-1:0] prev;
    d = 8'h5A;
    #5 clk = 1; #5 clk = 0; #1;
    check(q == 8'h5A, "captured on falling edge");
    for (int i = 0; i < 50; i++) begin
      prev = d;
      #4 clk = 1;           // rising edge
      #1 d = W'($urandom);  // new PRPG value just after the rising edge
      check(q == prev, "holds through rising edge");
      #4 clk = 0; #1;       // falling edge
      check(q == d, "takes new value at falling edge");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
