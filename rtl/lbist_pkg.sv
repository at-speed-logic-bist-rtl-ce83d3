// lbist_pkg: types, constants and helper functions shared by the logic BIST blocks.
//
// - gate_cmd_e: the three operations the controller asks of a clock gating block
//   (seed/clear pulse, shift burst, double-capture pair).
// - lfsr_taps(): feedback taps of a maximal-length LFSR of a given length. The
//   paper fixes only the lengths (19 for every PRPG and short MISR, 99 and 80 for
//   the long MISRs); the polynomials are this design's choice, taken from the
//   widely published maximal-length tap tables.
// - ps_tap(): which PRPG stages feed each output of a phase shifter / space
//   expander. The paper gives only the purpose of this network; the three-tap
//   formula is this design's choice.
package lbist_pkg;

  // Command from controller to a clock gating block (held stable while req is high).
  typedef enum logic [1:0] {
    CMD_INIT  = 2'd0,  // one CCK pulse: PRPG loads its seed, MISR clears
    CMD_SHIFT = 2'd1,  // shift_len pulses on TCK and CCK (shift window)
    CMD_CAPT  = 2'd2   // two back-to-back TCK pulses (double capture, at speed)
  } gate_cmd_e;

  // Tap mask for a Fibonacci LFSR with stage 1 in bit 0: bit (t-1) set for tap t.
  // Lengths without a table entry fall back to taps (len, len-1), which is a valid
  // but not necessarily maximal-length register.
  function automatic logic [255:0] lfsr_taps(input int len);
    logic [255:0] m;
    m = '0;
    case (len)
      3:  begin m[2] = 1; m[1] = 1; end
      4:  begin m[3] = 1; m[2] = 1; end
      5:  begin m[4] = 1; m[2] = 1; end
      6:  begin m[5] = 1; m[4] = 1; end
      7:  begin m[6] = 1; m[5] = 1; end
      8:  begin m[7] = 1; m[5] = 1; m[4] = 1; m[3] = 1; end
      16: begin m[15] = 1; m[14] = 1; m[12] = 1; m[3] = 1; end
      19: begin m[18] = 1; m[5] = 1; m[1] = 1; m[0] = 1; end
      80: begin m[79] = 1; m[78] = 1; m[42] = 1; m[41] = 1; end
      99: begin m[98] = 1; m[96] = 1; m[91] = 1; m[90] = 1; end
      default: begin m[len-1] = 1; if (len > 1) m[len-2] = 1; end
    endcase
    return m;
  endfunction

  // PRPG stage feeding tap k (0..2) of phase-shifter output j, for a PRPG of length len.
  // a = j mod len; b and c are offset from a by amounts that vary with j, so that
  // neighbouring outputs never see the same stage pattern shifted by one.
  function automatic int ps_tap(input int j, input int k, input int len);
    int a, b, c;
    a = j % len;
    if (len < 3) return (k == 0) ? a : -1;  // too short for three taps: single tap only
    b = (a + 1 + ((3 * j + 2) % (len - 1))) % len;
    c = (a + 1 + ((5 * j + 7) % (len - 1))) % len;
    if (c == b) c = (b + 1) % len;
    if (c == a) c = (c + 1) % len;
    case (k)
      0: return a;
      1: return b;
      default: return c;
    endcase
  endfunction

endpackage
