// lbist_ps_spe: phase shifter and space expander (PS/SpE) of one clock domain.
//
// Purely combinational XOR network. Output j is the XOR of PRPG stages
// ps_tap(j,0), ps_tap(j,1) and ps_tap(j,2) (see lbist_pkg): three distinct stages
// whose spacing changes from output to output, so adjacent scan chains do not
// receive copies of one bit stream shifted by a cycle, and N_OUT chains can be fed
// from a LEN-bit PRPG. For LEN < 3 each output is a single stage.
//
// From the paper: PS breaks the inter-dependency of the PRPG streams and SpE lets
// the PRPG be shorter than the number of chains (Sec. 2.1). This design's choice:
// the three-tap formula.
module lbist_ps_spe #(
  parameter int unsigned LEN   = 19,
  parameter int unsigned N_OUT = 99
) (
  input  logic [LEN-1:0]   prpg,
  output logic [N_OUT-1:0] out
);
  for (genvar j = 0; j < N_OUT; j++) begin : g_out
    localparam int TA = lbist_pkg::ps_tap(j, 0, LEN);
    localparam int TB = lbist_pkg::ps_tap(j, 1, LEN);
    localparam int TC = lbist_pkg::ps_tap(j, 2, LEN);
    if (TB < 0) begin : g_one
      assign out[j] = prpg[TA];
    end else begin : g_three
      assign out[j] = prpg[TA] ^ prpg[TB] ^ prpg[TC];
    end
  end
endmodule
