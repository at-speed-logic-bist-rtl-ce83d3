// lbist_spc: space compactor between the scan outputs and the MISR of one domain.
//
// Output k is the XOR of all inputs i with i mod N_OUT == k. When N_IN <= N_OUT no
// compaction is needed and the inputs appear unchanged on the low outputs (the
// rest are 0): this is the configuration of the reported applications, which used
// no space compactor in order to keep the scan-out to MISR paths short.
// Combinational.
//
// From the paper: SpC reduces the MISR length (Sec. 2.1, Fig. 1) and was left out
// in the applications (Sec. 3, note 3). This design's choice: the modulo XOR mapping.
module lbist_spc #(
  parameter int unsigned N_IN  = 16,
  parameter int unsigned N_OUT = 5
) (
  input  logic [N_IN-1:0]  d,
  output logic [N_OUT-1:0] q
);
  always_comb begin
    q = '0;
    for (int i = 0; i < N_IN; i++) q[i % N_OUT] ^= d[i];
  end
endmodule
