// lbist_prpg: pseudo-random pattern generator of one clock domain.
//
// A LEN-bit Fibonacci LFSR (stage 1 in bit 0, feedback into bit 0 from the stages
// named by lbist_pkg::lfsr_taps). It is clocked by the domain's CCK clock, which the
// clock gating block pulses only in a shift window or for the seeding pulse, so every
// rising edge of clk is one step: with init high the register loads seed, otherwise
// it advances by one state. rst_n resets it asynchronously to 1 (never the all-zero
// lock-up state).
//
// From the paper: one PRPG per clock domain, LEN = 19 (Table 1), clocked by CCK (Fig. 3).
// This design's choice: the feedback polynomial x^19+x^6+x^2+x+1, seed loading through init.
module lbist_prpg #(
  parameter int unsigned LEN = 19
) (
  input  logic           clk,    // CCK of this domain
  input  logic           rst_n,
  input  logic           init,   // load seed on the next clk edge
  input  logic [LEN-1:0] seed,
  output logic [LEN-1:0] state
);
  localparam logic [LEN-1:0] TAPS = LEN'(lbist_pkg::lfsr_taps(LEN));

  logic fb;
  assign fb = ^(state & TAPS);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     state <= LEN'(1);
    else if (init)  state <= seed;
    else if (LEN > 1) state <= {state[LEN-2:0], fb};
    else            state <= LEN'(fb);
  end

  // An all-zero seed would lock the LFSR.
  a_seed_nonzero: assert property (@(posedge clk) disable iff (!rst_n) init |-> seed != '0)
    else $error("lbist_prpg: zero seed");
endmodule
