// lbist_top: at-speed logic BIST wrapper for a multi-clock-domain full-scan core.
//
// Everything of the BIST except the core itself, which stays outside and connects
// through the scan, clock and SE ports. One PRPG-MISR pair and one clock gating
// block per clock domain d = 1 .. N_DOM:
//   TPG      PRPGd (PRPG_LEN-bit LFSR, clocked by CCKd) -> PSd/SpEd (XOR phase
//            shifter / space expander to the N_CH[d] chain inputs) -> re-timing FFs
//            (falling edge of CCKd, RETIME = 1)
//   input selector  random patterns, or the external scan-in (PI/SI) in top-up mode
//   ODC      SpCd (XOR space compactor, identity when N_CH[d] <= MISR_W[d]) -> MISRd
//            (clocked by CCKd)
//   clock gating    TCKd (scan chains / core) and CCKd from CKd
// plus one controller (session sequencing, slow SE, Start / Finish / Result) and
// one TAP (TDI/TDO/TCK/TSM access to the configuration and the signatures).
//
// The defaults are core X of the paper's applications, the two-domain case the
// block diagram shows: 100 chains of at most 104 cells, a 99-bit MISR on the 99
// chains of the main domain and a 19-bit MISR on the one chain of the other (no
// space compaction), 19-bit PRPGs and 20K random patterns. The 99 + 1 split of the
// chains follows from the MISR lengths and the absence of space compactors; the
// paper does not print it. Core Y (8 domains) is N_DOM = 8 with its own N_CH and
// MISR_W lists.
//
// Chains are numbered across domains: domain d owns bits CH_OFF(d) .. CH_OFF(d) +
// N_CH[d] - 1 of scan_in / scan_out / ext_si, and bits SIG_OFF(d) .. of the
// concatenated signature. ck / tck bit d-1 belongs to domain d. The controller
// runs on ck[0].
//
// Configuration register (TAP instruction CONFIG, bit 0 first): seeds (domain 1
// first), golden signature (SIG_W bits), num_patterns, shift_len, d1, d3, d5, topup
// (see cfg_t). Status register (instruction STATUS, bit 0 first): signature
// (SIG_W bits), busy, result, finish. A session: load CONFIG through the TAP (or
// use the reset values), raise start, wait for finish; result is high when all
// signatures match the golden values. In top-up mode the same sequence runs, but
// the chains are loaded from ext_si and the tester observes the core's scan outputs.
//
// Timing: per pattern one shift window of shift_len CKd pulses in every domain and
// one capture window of D1 + (N_DOM-1)*D3 + D5 cycles of ck[0] plus the two-pulse
// capture bursts and the handshake latencies (180 ck[0] cycles per pattern at the
// defaults with equal-speed clocks, of which 104 are shift cycles).
module lbist_top #(
  parameter int unsigned N_DOM          = 2,
  parameter int unsigned N_CH   [N_DOM] = '{99, 1},   // scan chains per domain
  parameter int unsigned MISR_W [N_DOM] = '{99, 19},  // MISR length per domain
  parameter int unsigned CHAIN_LEN      = 104,        // max. chain length
  parameter int unsigned PRPG_LEN       = 19,
  parameter int unsigned NUM_PATTERNS   = 20000,
  parameter int unsigned D1             = 4,
  parameter int unsigned D3             = 4,
  parameter int unsigned D5             = 4,
  parameter bit          RETIME         = 1'b1,
  parameter logic [PRPG_LEN-1:0] SEED_BASE = PRPG_LEN'(19'h2B5A1),
  // totals, to be set with N_CH and MISR_W (checked at elaboration)
  parameter int unsigned TOT_CH         = 100,        // sum of N_CH
  parameter int unsigned SIG_W          = 118         // sum of MISR_W
) (
  input  logic [N_DOM-1:0]  ck,          // functional clocks CK1 .. CKn
  input  logic              rst_n,       // power-on reset
  input  logic              start,
  output logic              finish,
  output logic              result,
  // Boundary-Scan
  input  logic              tck,
  input  logic              tsm,
  input  logic              tdi,
  output logic              tdo,
  // to / from the BIST-ready core
  output logic [N_DOM-1:0]  tck_d,       // TCK1 .. TCKn: domain clocks of the core
  output logic              se,          // scan enable, all domains
  output logic              test_mode,   // BIST session running
  output logic [TOT_CH-1:0] scan_in,
  input  logic [TOT_CH-1:0] scan_out,
  // external top-up ATPG scan data (PI/SI)
  input  logic [TOT_CH-1:0] ext_si
);
  import lbist_pkg::*;

  function automatic int unsigned sum(input int unsigned a [N_DOM]);
    int unsigned s = 0;
    for (int i = 0; i < N_DOM; i++) s += a[i];
    return s;
  endfunction
  function automatic int unsigned off(input int unsigned a [N_DOM], input int d);
    int unsigned s = 0;
    for (int i = 0; i < d; i++) s += a[i];
    return s;
  endfunction
  // Seed of domain d: SEED_BASE for domain 1, then distinct derived values.
  function automatic logic [PRPG_LEN-1:0] seed_of(input int d);
    logic [PRPG_LEN-1:0] s;
    s = SEED_BASE ^ PRPG_LEN'(d * 32'h36A75);
    return (s == '0) ? PRPG_LEN'(1) : s;
  endfunction

  if (TOT_CH != sum(N_CH) || SIG_W != sum(MISR_W)) begin : g_size_error
    $error("lbist_top: TOT_CH / SIG_W do not match N_CH / MISR_W");
  end

  localparam int unsigned PAT_W = 16;
  localparam int unsigned CNT_W = 16;
  localparam int unsigned GAP_W = 8;

  typedef struct packed {
    logic                            topup;
    logic [GAP_W-1:0]                d5;
    logic [GAP_W-1:0]                d3;
    logic [GAP_W-1:0]                d1;
    logic [CNT_W-1:0]                shift_len;
    logic [PAT_W-1:0]                num_patterns;
    logic [SIG_W-1:0]                golden;
    logic [N_DOM-1:0][PRPG_LEN-1:0]  seed;
  } cfg_t;

  typedef struct packed {
    logic             finish;
    logic             result;
    logic             busy;
    logic [SIG_W-1:0] sig;
  } stat_t;

  function automatic cfg_t cfg_reset();
    cfg_t c;
    c.topup = 1'b0; c.d5 = GAP_W'(D5); c.d3 = GAP_W'(D3); c.d1 = GAP_W'(D1);
    c.shift_len = CNT_W'(CHAIN_LEN); c.num_patterns = PAT_W'(NUM_PATTERNS); c.golden = '0;
    for (int d = 0; d < N_DOM; d++) c.seed[d] = seed_of(d);
    return c;
  endfunction

  cfg_t  cfg;
  stat_t stat;

  // ---------------- Boundary-Scan
  lbist_tap #(.CFG_W($bits(cfg_t)), .STAT_W($bits(stat_t)), .CFG_RESET(cfg_reset())) u_tap (
    .tck(tck), .tms(tsm), .tdi(tdi), .rst_n(rst_n), .tdo(tdo), .cfg(cfg), .stat(stat));

  // ---------------- controller
  logic [N_DOM-1:0] req, ack;
  gate_cmd_e        cmd;
  logic [CNT_W-1:0] shift_len;
  logic             init, misr_en, busy;
  logic [SIG_W-1:0] sig;

  lbist_ctrl #(.PAT_W(PAT_W), .CNT_W(CNT_W), .GAP_W(GAP_W), .N_DOM(N_DOM), .SIG_W(SIG_W)) u_ctrl (
    .clk(ck[0]), .rst_n(rst_n), .start(start),
    .num_patterns(cfg.num_patterns), .shift_len_in(cfg.shift_len),
    .d1(cfg.d1), .d3(cfg.d3), .d5(cfg.d5), .golden(cfg.golden), .sig(sig),
    .req(req), .cmd(cmd), .shift_len(shift_len), .ack(ack),
    .init(init), .misr_en(misr_en), .se(se), .busy(busy), .finish(finish), .result(result));

  assign test_mode = busy;
  assign stat = '{finish: finish, result: result, busy: busy, sig: sig};

  // ---------------- one TPG, input selector, ODC and clock gating block per domain
  for (genvar d = 0; d < N_DOM; d++) begin : g_dom
    localparam int unsigned NC = N_CH[d];
    localparam int unsigned MW = MISR_W[d];
    localparam int unsigned CO = off(N_CH, d);
    localparam int unsigned SO = off(MISR_W, d);

    logic                cck;
    logic [PRPG_LEN-1:0] prpg;
    logic [NC-1:0]       ps, tpg;
    logic [MW-1:0]       spc;

    lbist_clk_gate #(.CNT_W(CNT_W)) u_cg (
      .ck(ck[d]), .rst_n(rst_n), .test_mode(busy), .req(req[d]), .cmd(cmd),
      .shift_len(shift_len), .ack(ack[d]), .tck(tck_d[d]), .cck(cck));

    lbist_prpg #(.LEN(PRPG_LEN)) u_prpg (
      .clk(cck), .rst_n(rst_n), .init(init), .seed(cfg.seed[d]), .state(prpg));
    lbist_ps_spe #(.LEN(PRPG_LEN), .N_OUT(NC)) u_ps (.prpg(prpg), .out(ps));

    if (RETIME) begin : g_retime
      lbist_retime #(.WIDTH(NC)) u_rt (.clk(cck), .d(ps), .q(tpg));
    end else begin : g_direct
      assign tpg = ps;
    end

    lbist_input_sel #(.N(NC)) u_isel (
      .topup(cfg.topup), .tpg(tpg), .ext_si(ext_si[CO +: NC]), .scan_in(scan_in[CO +: NC]));

    lbist_spc #(.N_IN(NC), .N_OUT(MW)) u_spc (.d(scan_out[CO +: NC]), .q(spc));
    lbist_misr #(.WIDTH(MW), .N_IN(MW)) u_misr (
      .clk(cck), .rst_n(rst_n), .init(init), .en(misr_en), .d(spc), .sig(sig[SO +: MW]));
  end
endmodule
