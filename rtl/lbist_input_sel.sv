// lbist_input_sel: input selector in front of the scan inputs of one clock domain.
//
// With topup low the scan chains get the random patterns of the TPG; with topup
// high they get the external scan-in data (PI/SI), through which a tester applies
// deterministic top-up ATPG patterns for the faults random patterns miss.
// Combinational, N bits wide.
//
// From the paper: the input selector provides random patterns or top-up ATPG
// patterns to the core (Sec. 2.1, Fig. 1). This design's choice: one mode bit for
// all chains of the domain.
module lbist_input_sel #(
  parameter int unsigned N = 99
) (
  input  logic         topup,
  input  logic [N-1:0] tpg,
  input  logic [N-1:0] ext_si,
  output logic [N-1:0] scan_in
);
  always_comb scan_in = topup ? ext_si : tpg;
endmodule
