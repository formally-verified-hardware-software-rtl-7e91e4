// vrased_key_ac -- key access control monitor of HW-Mod (property P1).
//
// A two-state Mealy machine, Run and Reset. From Run it moves to Reset, and
// raises `reset` in that same cycle, when code outside the SW-Att region CR
// reads the key region KR:
//     !(PC in CR) && R_en && (D_addr in KR)  ->  reset
// In Reset, `reset` stays high until the cycle in which PC = 0 (the core has
// finished its reset, axiom A4); that cycle leaves Reset and drops `reset`.
// With VRF_AUTH = 1 (the optional verifier-authentication variant) a write
// by code outside CR to the counter region CTR is a violation as well.
//
// Interface: core signals pc, r_en, w_en, d_addr sampled every clock; one
// output `reset`, combinational in the inputs (Mealy) and in the state.
// Timing: the violation is flagged in the cycle it happens; the state
// register updates on the next rising clock edge.
//
// Follows the design: the rule, the Run/Reset states, the PC = 0 exit and
// the Mealy output convention. Own choices: the power-on reset rst_n puts the
// machine in Reset (so `reset` is held until the core shows PC = 0), and the
// exit from Reset also requires that no violation is present in that cycle,
// so the rule holds in every state.
module vrased_key_ac
  import vrased_pkg::*;
#(
  parameter addr_t CR_MIN_P = CR_MIN,
  parameter addr_t CR_MAX_P = CR_MAX,
  parameter addr_t K_MIN_P  = K_MIN,
  parameter addr_t K_MAX_P  = K_MAX,
  parameter addr_t CTR_MIN_P = CTR_MIN,
  parameter addr_t CTR_MAX_P = CTR_MAX,
  parameter bit    VRF_AUTH = 1'b0
) (
  input  logic  clk,
  input  logic  rst_n,
  input  addr_t pc,
  input  logic  r_en,
  input  logic  w_en,
  input  addr_t d_addr,
  output logic  reset
);

  mon_state_e state, state_nxt;
  logic pc_in_cr, violation;

  always_comb begin
    pc_in_cr  = in_range(pc, CR_MIN_P, CR_MAX_P);
    violation = !pc_in_cr && r_en && in_range(d_addr, K_MIN_P, K_MAX_P);
    if (VRF_AUTH)
      violation = violation || (!pc_in_cr && w_en && in_range(d_addr, CTR_MIN_P, CTR_MAX_P));
  end

  always_comb begin
    state_nxt = state;
    unique case (state)
      MON_RUN:   if (violation) state_nxt = MON_RESET;
      MON_RESET: if (pc == RESET_PC && !violation) state_nxt = MON_RUN;
      default:   state_nxt = MON_RESET;
    endcase
  end

  // Mealy output: high on the transition into Reset and while in Reset.
  assign reset = (state_nxt == MON_RESET);

  // The rule itself: a violating cycle always raises reset.
  a_rule: assert property (@(posedge clk) violation |-> reset);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) state <= MON_RESET;
    else        state <= state_nxt;

endmodule
