// tb_lbist_input_sel: random test of the input selector in both modes.
module tb_lbist_input_sel;
  localparam int N = 37;
  logic topup;
  logic [N-1:0] tpg, ext, si;
  int checks = 0, failures = 0;

  lbist_input_sel #(.N(N)) dut (.topup(topup), .tpg(tpg), .ext_si(ext), .scan_in(si));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      topup = 1'($urandom);
      tpg = {$urandom, $urandom}; ext = {$urandom, $urandom};
      #1;
      checks++;
      if (si != (topup ? ext : tpg)) begin failures++; $display("FAIL: vector %0d", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
