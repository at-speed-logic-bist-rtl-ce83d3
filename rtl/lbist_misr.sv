// lbist_misr: multiple-input signature register of one clock domain.
//
// A WIDTH-bit LFSR with N_IN parallel inputs XORed into its first N_IN stages
// (input i into stage i, the remaining stages get 0). Clocked by the domain's CCK,
// which pulses only in shift windows and for the seeding pulse: init clears the
// register, en selects compression (with en low the register holds, which is how
// the unload of the very first, undefined chain contents is kept out of the signature).
// N_IN must not exceed WIDTH; wider scan-out sets go through a space compactor first.
//
// From the paper: one MISR per clock domain, lengths 19 and 99 (core X, Table 1),
// clocked by CCK (Fig. 3). This design's choice: the feedback polynomial, clear-to-zero.
module lbist_misr #(
  parameter int unsigned WIDTH = 19,
  parameter int unsigned N_IN  = 19
) (
  input  logic             clk,    // CCK of this domain
  input  logic             rst_n,
  input  logic             init,   // clear on the next clk edge
  input  logic             en,     // compress on the next clk edge
  input  logic [N_IN-1:0]  d,
  output logic [WIDTH-1:0] sig
);
  localparam logic [WIDTH-1:0] TAPS = WIDTH'(lbist_pkg::lfsr_taps(WIDTH));

  logic             fb;
  logic [WIDTH-1:0] din, shifted;
  assign fb      = ^(sig & TAPS);
  assign din     = WIDTH'(d);
  assign shifted = (WIDTH > 1) ? {sig[WIDTH-2:0], fb} : WIDTH'(fb);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    sig <= '0;
    else if (init) sig <= '0;
    else if (en)   sig <= shifted ^ din;
  end

  initial assert (N_IN <= WIDTH) else $error("lbist_misr: N_IN > WIDTH");
endmodule
