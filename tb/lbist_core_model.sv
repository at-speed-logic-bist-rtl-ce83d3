// lbist_core_model: behavioural stand-in for a BIST-ready core with N_DOM clock
// domains, used only by the testbenches (the real core is the user's IP).
//
// Domain k has N_CH[k] scan chains, all L cells long; its cells are numbered
// i = c*L + j (chain c, position j). Cell j = 0 of a chain takes the scan input and
// cell L-1 drives the scan output. With se high a rising edge of tck[k] shifts
// the chains of domain k; with se low it captures the next state of every cell:
//   x_k[i] <= x_k[i] ^ (x_k[(i+1) mod M_k] & x_k[(i+3) mod M_k]) ^ x_p[i mod M_p]
// where M_k is the number of cells of domain k and p = k-1 (domain 0 reads the
// last domain), so every domain has logic inside it and logic fed from another
// domain. With fault high the capture input of cell 0 of domain 0 is stuck at 0.
// Scan ports are numbered across domains like the wrapper's.
module lbist_core_model #(
  parameter int N_DOM          = 2,
  parameter int N_CH   [N_DOM] = '{4, 2},
  parameter int L              = 5,
  parameter int TOT_CH         = 6
) (
  input  logic [N_DOM-1:0]  tck,
  input  logic              se,
  input  logic              fault,
  input  logic [TOT_CH-1:0] si,
  output logic [TOT_CH-1:0] so
);
  function automatic int off(input int d);
    int s = 0;
    for (int i = 0; i < d; i++) s += N_CH[i];
    return s;
  endfunction

  for (genvar k = 0; k < N_DOM; k++) begin : g
    localparam int NC = N_CH[k];
    localparam int M  = NC * L;
    localparam int P  = (k + N_DOM - 1) % N_DOM;
    localparam int MP = N_CH[P] * L;
    localparam int CO = off(k);
    logic [M-1:0] x;

    always_ff @(posedge tck[k]) begin
      if (se) begin
        for (int c = 0; c < NC; c++) x[c*L +: L] <= (L > 1) ? {x[c*L +: L-1], si[CO + c]} : L'(si[CO + c]);
      end else begin
        for (int i = 0; i < M; i++) x[i] <= x[i] ^ (x[(i+1) % M] & x[(i+3) % M]) ^ g[P].x[i % MP];
        if (fault && k == 0) x[0] <= 1'b0;
      end
    end

    for (genvar c = 0; c < NC; c++) begin : g_so
      assign so[CO + c] = x[c*L + L-1];
    end
  end
endmodule
