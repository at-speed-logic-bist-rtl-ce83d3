// lbist_retime: re-timing flip-flops between the PRPG side and the scan chains.
//
// The PRPG and MISR clock CCK is deliberately ahead in phase of the scan-chain
// clock TCK, so the path PRPG -> scan chain can only have hold-time violations.
// These WIDTH flip-flops sample the phase-shifter outputs on the falling edge of
// CCK and hold them through the next rising edge of TCK, which removes the hold
// race. Functionally the chains still see the PRPG state of the cycle before the
// shift edge, so the pattern stream is the same as without re-timing.
//
// From the paper: re-timing FFs correct the hold-time violations (Sec. 2.3).
// This design's choice: falling-edge flip-flops clocked by CCK, no reset (data only,
// always written by the seeding pulse before a shift window reads it).
module lbist_retime #(
  parameter int unsigned WIDTH = 99
) (
  input  logic             clk,   // CCK of this domain
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);
  always_ff @(negedge clk) q <= d;
endmodule
