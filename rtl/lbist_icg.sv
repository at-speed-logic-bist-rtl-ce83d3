// lbist_icg: integrated clock gating cell (latch + AND).
//
// en is captured by a latch that is transparent while clk is low, and the output
// is clk AND the latched enable, so gclk carries whole clock pulses only and never
// glitches when en changes right after a rising edge. The latch is intended: it is
// the standard glitch-free gating structure, and a synthesis flow maps this module
// onto the library's clock gating cell.
module lbist_icg (
  input  logic clk,
  input  logic en,
  output logic gclk
);
  logic en_l;
  always_latch if (!clk) en_l = en;
  assign gclk = clk & en_l;
endmodule
