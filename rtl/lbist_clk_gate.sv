// lbist_clk_gate: clock gating block of one clock domain.
//
// Derives the two test clocks of a domain from its free-running functional clock ck:
//   tck - drives the domain's scan chains (the core's own clock in test),
//   cck - drives the domain's PRPG, re-timing FFs and MISR.
// Outside BIST (test_mode low) tck is ck itself, so the core runs functionally.
// In BIST the controller, which may run on an unrelated clock, hands over one
// command at a time with a four-phase req/ack handshake (req synchronised here by
// two flip-flops, cmd and shift_len quasi-static while req is high):
//   CMD_INIT  - one cck pulse (PRPG seeding / MISR clear),
//   CMD_SHIFT - shift_len pulses on both tck and cck (one shift window),
//   CMD_CAPT  - two tck pulses on consecutive ck cycles (C1/C2 or C3/C4 of the
//               double-capture scheme); cck stays off.
// When the burst is over ack rises; it falls once req has fallen.
// Because the two capture pulses are adjacent ck pulses, the launch-to-capture
// time is exactly one functional period: the test runs at the functional speed of
// the domain, without changing any clock frequency.
//
// Timing: an enable set at one rising edge of ck opens the gate for the next high
// phase, so a burst starts three ck cycles after req rises (two for the
// synchroniser, one for the enable) and ack rises at the edge of the last pulse.
//
// From the paper: TCKn generated from CKn by gating (Fig. 1), two capture pulses per
// clock at functional frequency (Sec. 2.2, Fig. 2), CCKn driving PRPG and MISR
// (Fig. 3). This design's choice: the handshake, command set and ICG gating. The
// phase lead of cck over tck that the paper asks for is a clock-tree property of
// the physical design; both gates here are the same cell.
module lbist_clk_gate
  import lbist_pkg::*;
#(
  parameter int unsigned CNT_W = 16
) (
  input  logic             ck,         // free-running functional clock CKn
  input  logic             rst_n,
  input  logic             test_mode,  // BIST session active
  input  logic             req,        // from controller (asynchronous)
  input  gate_cmd_e        cmd,        // stable while req is high
  input  logic [CNT_W-1:0] shift_len,  // pulses per shift window, stable while req is high
  output logic             ack,        // to controller (synchronised there)
  output logic             tck,        // TCKn: scan-chain clock
  output logic             cck         // CCKn: PRPG / MISR clock
);
  typedef enum logic [1:0] {G_IDLE, G_BURST, G_DONE} gstate_e;

  gstate_e          st;
  logic [1:0]       req_sync;
  logic [CNT_W-1:0] cnt;
  logic             tck_en, cck_en;

  always_ff @(posedge ck or negedge rst_n) begin
    if (!rst_n) req_sync <= '0;
    else        req_sync <= {req_sync[0], req};
  end

  always_ff @(posedge ck or negedge rst_n) begin
    if (!rst_n) begin
      st <= G_IDLE; cnt <= '0; tck_en <= 1'b0; cck_en <= 1'b0; ack <= 1'b0;
    end else begin
      case (st)
        G_IDLE: if (req_sync[1]) begin
          st <= G_BURST;
          case (cmd)
            CMD_INIT:  begin cnt <= CNT_W'(1); tck_en <= 1'b0; cck_en <= 1'b1; end
            CMD_SHIFT: begin cnt <= shift_len; tck_en <= 1'b1; cck_en <= 1'b1; end
            default:   begin cnt <= CNT_W'(2); tck_en <= 1'b1; cck_en <= 1'b0; end
          endcase
        end
        G_BURST: begin
          // cnt counts the pulses still to come, including the one now enabled.
          if (cnt <= CNT_W'(1)) begin
            tck_en <= 1'b0; cck_en <= 1'b0; ack <= 1'b1; st <= G_DONE;
          end
          cnt <= cnt - CNT_W'(1);
        end
        default: if (!req_sync[1]) begin ack <= 1'b0; st <= G_IDLE; end
      endcase
    end
  end

  logic tck_gate_en;
  assign tck_gate_en = !test_mode || tck_en;

  lbist_icg u_icg_tck (.clk(ck), .en(tck_gate_en), .gclk(tck));
  lbist_icg u_icg_cck (.clk(ck), .en(cck_en),      .gclk(cck));

  // A shift command with zero length would still give one pulse; the controller never sends it.
  a_len_nonzero: assert property (@(posedge ck) disable iff (!rst_n)
    (st == G_IDLE && req_sync[1] && cmd == CMD_SHIFT) |-> shift_len != '0)
    else $error("lbist_clk_gate: zero shift length");
endmodule
