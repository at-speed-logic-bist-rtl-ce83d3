// lbist_ctrl: logic BIST controller.
//
// Runs one self-test session per rising edge of start and reports it on finish
// (high from the end of the session until the next start) and result (high when
// all N_DOM signatures, concatenated into sig, equal the golden values). It runs
// on clk (the free-running clock of domain 1) and drives the N_DOM clock gating
// blocks through a four-phase req/ack handshake per domain (ack synchronised by
// two flip-flops), so the domains may have any frequencies.
//
// Session, in the order of the paper's timing diagram:
//   INIT           all domains: one CCK pulse seeds the PRPGs and clears the MISRs
//   SHIFT          all domains: shift_len shift pulses (first window: MISRs off)
//   for each pattern:
//     SE falls, wait d1 cycles
//     CAPT domain 1 (C1, C2 at speed), wait d3 cycles
//     CAPT domain 2 (C3, C4 at speed), wait d3 cycles, ... up to domain N_DOM
//     SE rises, wait d5 cycles
//     SHIFT all domains, MISRs on (unloads the responses, loads the next pattern)
//   compare signatures, finish.
// SE is therefore one slow, level signal for all domains: it changes only while
// no clock pulse is due and has d1 (falling) or d5 (rising) cycles, plus the
// handshake latency, to settle before the next pulse.
// d3 separates the last capture pulse of one domain from the first of the next
// and is set larger than the skew between the domains.
//
// From the paper: Start/Finish/Result, double capture per domain, slow common SE,
// d1/d3/d5 gaps (Sec. 1, 2.2, Fig. 2), fixed pattern count (Table 1). This design's
// choice: the handshake, the MISR hold during the first unload, pass = signatures
// equal golden, cycle-count gaps programmed through the configuration inputs, and
// for more than two domains the capture order 1, 2, ..., N_DOM with d3 between
// neighbours (the paper's diagram shows two domains).
module lbist_ctrl
  import lbist_pkg::*;
#(
  parameter int unsigned PAT_W  = 16,
  parameter int unsigned CNT_W  = 16,
  parameter int unsigned GAP_W  = 8,
  parameter int unsigned N_DOM  = 2,
  parameter int unsigned SIG_W  = 118     // sum of the MISR widths
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,          // asynchronous, rising edge starts a session
  // configuration, static during a session
  input  logic [PAT_W-1:0]  num_patterns,   // random patterns per session (>= 1)
  input  logic [CNT_W-1:0]  shift_len_in,   // max. scan chain length
  input  logic [GAP_W-1:0]  d1, d3, d5,     // gaps in clk cycles
  input  logic [SIG_W-1:0]  golden,
  // signatures (quasi-static when read: all MISRs are idle at the end)
  input  logic [SIG_W-1:0]  sig,
  // to / from the clock gating blocks
  output logic [N_DOM-1:0]  req,            // bit n-1: domain n
  output gate_cmd_e         cmd,
  output logic [CNT_W-1:0]  shift_len,
  input  logic [N_DOM-1:0]  ack,
  // to PRPG / MISR / core
  output logic              init,           // seeding pulse in progress
  output logic              misr_en,        // MISRs compress in this shift window
  output logic              se,             // scan enable, common to all domains
  output logic              busy,           // session running (test mode)
  output logic              finish,
  output logic              result
);
  typedef enum logic [3:0] {
    S_IDLE, S_INIT, S_SHIFT, S_D1, S_CAPT, S_D3, S_D5, S_CMP, S_DONE
  } state_e;

  state_e           st;
  logic             hs_wait;      // handshake of the current state is in progress
  logic [N_DOM-1:0] ack_s1, ack_s2;
  logic [$clog2(N_DOM+1)-1:0] dom;  // domain being captured (0-based)
  logic [2:0]       start_s;
  logic [PAT_W-1:0] pat_cnt;
  logic [GAP_W-1:0] gap;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ack_s1 <= '0; ack_s2 <= '0; start_s <= '0;
    end else begin
      ack_s1 <= ack; ack_s2 <= ack_s1; start_s <= {start_s[1:0], start};
    end
  end

  // Issue the state's command to the domains in mask m; true once the four-phase
  // handshake with all of them has completed.
  logic [N_DOM-1:0] mask;
  always_comb begin
    unique case (st)
      S_INIT, S_SHIFT: mask = '1;
      S_CAPT:          mask = N_DOM'(1) << dom;
      default:         mask = '0;
    endcase
  end
  logic hs_done;
  assign hs_done = hs_wait && (req == '0) && ((ack_s2 & mask) == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; hs_wait <= 1'b0; req <= '0; cmd <= CMD_INIT; shift_len <= '0;
      init <= 1'b0; misr_en <= 1'b0; se <= 1'b0; busy <= 1'b0;
      finish <= 1'b0; result <= 1'b0; pat_cnt <= '0; gap <= '0; dom <= '0;
    end else begin
      // generic handshake for the command states
      if (mask != '0) begin
        if (!hs_wait) begin
          req <= mask; hs_wait <= 1'b1;
        end else if (req != '0 && (ack_s2 & mask) == mask) begin
          req <= '0;
        end
      end
      case (st)
        S_IDLE: if (start_s[1] && !start_s[2]) begin
          st <= S_INIT; busy <= 1'b1; finish <= 1'b0; result <= 1'b0;
          cmd <= CMD_INIT; init <= 1'b1; se <= 1'b1; misr_en <= 1'b0;
          shift_len <= shift_len_in; pat_cnt <= '0;
        end
        S_INIT: if (hs_done) begin
          hs_wait <= 1'b0; init <= 1'b0; cmd <= CMD_SHIFT; st <= S_SHIFT;
        end
        S_SHIFT: if (hs_done) begin
          hs_wait <= 1'b0;
          if (misr_en && pat_cnt >= num_patterns) begin
            st <= S_CMP; se <= 1'b1; misr_en <= 1'b0;
          end else begin
            st <= S_D1; se <= 1'b0; gap <= d1;
          end
        end
        S_D1: if (gap == '0) begin st <= S_CAPT; cmd <= CMD_CAPT; dom <= '0; end
              else gap <= gap - 1'b1;
        S_CAPT: if (hs_done) begin
          hs_wait <= 1'b0;
          if (int'(dom) == N_DOM - 1) begin
            st <= S_D5; gap <= d5; pat_cnt <= pat_cnt + 1'b1; se <= 1'b1;
          end else begin
            st <= S_D3; gap <= d3;
          end
        end
        S_D3: if (gap == '0) begin st <= S_CAPT; dom <= dom + 1'b1; end
              else gap <= gap - 1'b1;
        S_D5: if (gap == '0) begin
          st <= S_SHIFT; misr_en <= 1'b1; cmd <= CMD_SHIFT;
        end else gap <= gap - 1'b1;
        S_CMP: begin
          result <= (sig == golden);
          finish <= 1'b1; busy <= 1'b0; st <= S_DONE;
        end
        default: st <= S_IDLE;  // S_DONE: finish stays high until the next start
      endcase
    end
  end

  // Handshake rule: the command must not change while a request is outstanding.
  a_cmd_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (req != '0 && $past(req) != '0) |-> cmd == $past(cmd))
    else $error("lbist_ctrl: cmd changed during req");

  // Slow-SE rule: SE only changes while no domain has a burst requested or running.
  a_se_quiet: assert property (@(posedge clk) disable iff (!rst_n)
    (se != $past(se)) |-> ($past(req) == '0 && $past(ack_s2) == '0))
    else $error("lbist_ctrl: SE changed during a clock burst");
endmodule
