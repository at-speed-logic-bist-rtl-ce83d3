// lbist_tap: Boundary-Scan (IEEE 1149.1 style) test access port of the BIST.
//
// The standard 16-state TAP controller, clocked by the test clock tck and steered
// by tms (the TSM pin), with a 4-bit instruction register and three data registers:
//   BYPASS (4'b1111, also selected after reset): 1-bit bypass register,
//   CONFIG (4'b0001): CFG_W-bit register; Capture-DR loads the current
//                     configuration, Update-DR writes the shifted value to cfg,
//   STATUS (4'b0010): STAT_W-bit read-only register; Capture-DR loads stat.
// Data shift in at tdi and out at tdo, least significant bit first; tdo changes on
// the falling edge of tck and is 0 outside Shift-IR / Shift-DR. rst_n (power-on
// reset) puts the controller in Test-Logic-Reset and cfg at CFG_RESET; five tck
// cycles with tms high do the same for the controller.
// cfg is read by the BIST logic in other clock domains only while no session runs,
// so it is used there without synchronisers.
//
// From the paper: a standard Boundary-Scan interface (TDI, TDO, TCK, TSM) loads the
// initial test data and reads internal states (Sec. 1, 2.1, Fig. 1). This design's
// choice: the instruction codes and the data registers behind them.
module lbist_tap #(
  parameter int unsigned        CFG_W     = 16,
  parameter int unsigned        STAT_W    = 8,
  parameter logic [CFG_W-1:0]   CFG_RESET = '0
) (
  input  logic              tck,
  input  logic              tms,
  input  logic              tdi,
  input  logic              rst_n,
  output logic              tdo,
  output logic [CFG_W-1:0]  cfg,
  input  logic [STAT_W-1:0] stat
);
  typedef enum logic [3:0] {
    TLR, RTI, SEL_DR, CAP_DR, SH_DR, EX1_DR, PA_DR, EX2_DR, UPD_DR,
    SEL_IR, CAP_IR, SH_IR, EX1_IR, PA_IR, EX2_IR, UPD_IR
  } tap_state_e;

  localparam logic [3:0] IR_BYPASS = 4'b1111;
  localparam logic [3:0] IR_CONFIG = 4'b0001;
  localparam logic [3:0] IR_STATUS = 4'b0010;

  tap_state_e st, st_n;

  always_comb begin
    unique case (st)
      TLR:    st_n = tms ? TLR    : RTI;
      RTI:    st_n = tms ? SEL_DR : RTI;
      SEL_DR: st_n = tms ? SEL_IR : CAP_DR;
      CAP_DR: st_n = tms ? EX1_DR : SH_DR;
      SH_DR:  st_n = tms ? EX1_DR : SH_DR;
      EX1_DR: st_n = tms ? UPD_DR : PA_DR;
      PA_DR:  st_n = tms ? EX2_DR : PA_DR;
      EX2_DR: st_n = tms ? UPD_DR : SH_DR;
      UPD_DR: st_n = tms ? SEL_DR : RTI;
      SEL_IR: st_n = tms ? TLR    : CAP_IR;
      CAP_IR: st_n = tms ? EX1_IR : SH_IR;
      SH_IR:  st_n = tms ? EX1_IR : SH_IR;
      EX1_IR: st_n = tms ? UPD_IR : PA_IR;
      PA_IR:  st_n = tms ? EX2_IR : PA_IR;
      EX2_IR: st_n = tms ? UPD_IR : SH_IR;
      default: st_n = tms ? SEL_DR : RTI;  // UPD_IR
    endcase
  end

  logic [3:0]        ir, ir_sh;
  logic              byp;
  logic [CFG_W-1:0]  cfg_sh;
  logic [STAT_W-1:0] stat_sh;

  always_ff @(posedge tck or negedge rst_n) begin
    if (!rst_n) begin
      st <= TLR; ir <= IR_BYPASS; ir_sh <= '0; byp <= 1'b0;
      cfg_sh <= '0; stat_sh <= '0; cfg <= CFG_RESET;
    end else begin
      st <= st_n;
      case (st)
        TLR:    ir <= IR_BYPASS;
        CAP_IR: ir_sh <= 4'b0001;                 // fixed 01 pattern in the low bits
        SH_IR:  ir_sh <= {tdi, ir_sh[3:1]};
        UPD_IR: ir <= ir_sh;
        CAP_DR: case (ir)
                  IR_CONFIG: cfg_sh  <= cfg;
                  IR_STATUS: stat_sh <= stat;
                  default:   byp     <= 1'b0;
                endcase
        SH_DR:  case (ir)
                  IR_CONFIG: cfg_sh  <= (CFG_W  > 1) ? {tdi, cfg_sh[CFG_W-1:1]}   : CFG_W'(tdi);
                  IR_STATUS: stat_sh <= (STAT_W > 1) ? {tdi, stat_sh[STAT_W-1:1]} : STAT_W'(tdi);
                  default:   byp     <= tdi;
                endcase
        UPD_DR: if (ir == IR_CONFIG) cfg <= cfg_sh;
        default: ;
      endcase
    end
  end

  always_ff @(negedge tck or negedge rst_n) begin
    if (!rst_n) tdo <= 1'b0;
    else if (st == SH_IR) tdo <= ir_sh[0];
    else if (st == SH_DR) begin
      case (ir)
        IR_CONFIG: tdo <= cfg_sh[0];
        IR_STATUS: tdo <= stat_sh[0];
        default:   tdo <= byp;
      endcase
    end else tdo <= 1'b0;
  end
endmodule
