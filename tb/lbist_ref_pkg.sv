// lbist_ref_pkg: class lbist_ref, a reference model of a whole BIST session, for the testbenches.
//
// Replays a session on the behavioural core (lbist_core_model) bit by bit,
// written independently of the RTL from the rules of the design:
//   PRPG: Fibonacci LFSR x^19+x^6+x^2+x+1, stage 1 in bit 0, loaded with the seed;
//   phase shifter: chain j gets the XOR of stages a, b, c with a = j mod 19,
//     b = a+1+((3j+2) mod 18), c = a+1+((5j+7) mod 18) (mod 19), c moved on by one
//     while it equals b or a;
//   shift window of L cycles in every domain: per cycle the MISR takes the scan
//     outputs (space-compacted: chain c into bit c mod W), then the chains shift in
//     the phase-shifter outputs of the current PRPG state, then the PRPG steps;
//   the first window loads only (MISRs off); then per pattern the domains capture
//     twice each in the order 0, 1, ..., N-1, followed by a shift window;
//   MISR: x' = {x[W-2:0], fb} ^ inputs, fb from the maximal-length taps of W.
// Signatures are returned concatenated, domain 0 in the low bits.
package lbist_ref_pkg;

class lbist_ref;
  int ndom, L;
  int nch[], mw[];
  bit x[][];    // core state per domain, cell c*L + j

  function new(int ndom_, int nch_[], int mw_[], int L_);
    ndom = ndom_; nch = nch_; mw = mw_; L = L_;
    x = new[ndom];
    foreach (x[k]) x[k] = new[nch[k] * L];
  endfunction

  static function bit [18:0] prpg_step(bit [18:0] s);
    return {s[17:0], s[18] ^ s[5] ^ s[1] ^ s[0]};
  endfunction

  static function bit ps_bit(bit [18:0] s, int j);
    int a, b, c;
    a = j % 19;
    b = (a + 1 + ((3 * j + 2) % 18)) % 19;
    c = (a + 1 + ((5 * j + 7) % 18)) % 19;
    if (c == b) c = (b + 1) % 19;
    if (c == a) c = (c + 1) % 19;
    return s[a] ^ s[b] ^ s[c];
  endfunction

  // MISR feedback taps (1-based stage numbers) of a W-bit register
  static function void taps(int w, ref int t[$]);
    case (w)
      3:  t = '{3, 2};
      4:  t = '{4, 3};
      5:  t = '{5, 3};
      6:  t = '{6, 5};
      7:  t = '{7, 6};
      8:  t = '{8, 6, 5, 4};
      19: t = '{19, 6, 2, 1};
      80: t = '{80, 79, 43, 42};
      99: t = '{99, 97, 92, 91};
      default: t = '{w, w - 1};
    endcase
  endfunction

  function void capture(int k, bit fault);
    int p, m, mp;
    bit nx[];
    p = (k + ndom - 1) % ndom;
    m = nch[k] * L; mp = nch[p] * L;
    nx = new[m];
    for (int i = 0; i < m; i++) nx[i] = x[k][i] ^ (x[k][(i+1) % m] & x[k][(i+3) % m]) ^ x[p][i % mp];
    if (fault && k == 0) nx[0] = 0;
    x[k] = nx;
  endfunction

  // seeds: one per domain; ext: external scan-in per chain (numbered across domains)
  task run(bit [18:0] seeds[], int np, bit topup, bit ext[], bit fault, output bit [4095:0] sig);
    bit [18:0] p[];
    bit [127:0] m[];
    int t[$];
    int co, so;
    bit in_bits[];
    p = seeds;
    m = new[ndom];
    foreach (m[k]) m[k] = '0;
    for (int pat = -1; pat < np; pat++) begin
      if (pat >= 0)
        for (int k = 0; k < ndom; k++) begin capture(k, fault); capture(k, fault); end
      co = 0;
      for (int k = 0; k < ndom; k++) begin
        taps(mw[k], t);
        in_bits = new[nch[k] * L];
        for (int s = 0; s < L; s++) begin
          if (pat >= 0) begin
            bit [127:0] q;
            bit fb;
            q = '0;
            // the cell at the scan output in cycle s is the one loaded L-1-s cycles earlier
            for (int c = 0; c < nch[k]; c++) q[c % mw[k]] ^= x[k][c*L + L-1-s];
            fb = 0;
            foreach (t[i]) fb ^= m[k][t[i] - 1];
            m[k] = ((m[k] << 1) | 128'(fb)) ^ q;
            m[k] &= (128'(1) << mw[k]) - 1;
          end
          for (int c = 0; c < nch[k]; c++)
            in_bits[c*L + (L-1-s)] = topup ? ext[co + c] : ps_bit(p[k], c);
          p[k] = prpg_step(p[k]);
        end
        x[k] = in_bits;
        co += nch[k];
      end
    end
    sig = '0;
    so = 0;
    for (int k = 0; k < ndom; k++) begin
      for (int i = 0; i < mw[k]; i++) sig[so + i] = m[k][i];
      so += mw[k];
    end
  endtask
endclass

endpackage
