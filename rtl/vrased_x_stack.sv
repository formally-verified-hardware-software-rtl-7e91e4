// vrased_x_stack -- exclusive-stack (key confidentiality) monitor of HW-Mod
// (property P2).
//
// SW-Att keeps every key-tainted value on its own stack XS in RAM. This
// two-state Mealy machine (Run, Reset) enforces two rules:
//     !(PC in CR) && (R_en || W_en) && (D_addr in XS)              -> reset
//     (PC in CR) && W_en && !(D_addr in XS) && !(D_addr in MR)     -> reset
// i.e. only SW-Att touches XS, and SW-Att writes nowhere but XS and the MAC
// buffer MR. With VRF_AUTH = 1, SW-Att may also write the counter CTR (the
// second rule is relaxed as the verifier-authentication variant requires).
// `reset` rises in the violating cycle and stays high until PC = 0.
//
// Interface and timing as vrased_key_ac: inputs sampled every clock, Mealy
// output, state updated at the rising edge. Follows the design: both rules,
// the two states and the PC = 0 exit. Own choices: power-on reset enters
// Reset; leaving Reset also needs the cycle to be free of violations.
module vrased_x_stack
  import vrased_pkg::*;
#(
  parameter addr_t       CR_MIN_P   = CR_MIN,
  parameter addr_t       CR_MAX_P   = CR_MAX,
  parameter addr_t       XS_MIN_P   = XS_MIN,
  parameter addr_t       XS_MAX_P   = XS_MAX,
  parameter addr_t       MAC_ADDR_P = MAC_ADDR,
  parameter int unsigned MAC_SIZE_P = MAC_SIZE,
  parameter addr_t       CTR_MIN_P  = CTR_MIN,
  parameter addr_t       CTR_MAX_P  = CTR_MAX,
  parameter bit          VRF_AUTH   = 1'b0
) (
  input  logic  clk,
  input  logic  rst_n,
  input  addr_t pc,
  input  logic  r_en,
  input  logic  w_en,
  input  addr_t d_addr,
  output logic  reset
);

  localparam addr_t MR_MAX = addr_t'(32'(MAC_ADDR_P) + MAC_SIZE_P - 1);

  mon_state_e state, state_nxt;
  logic pc_in_cr, in_xs, in_mr, in_ctr, violation;

  always_comb begin
    pc_in_cr  = in_range(pc, CR_MIN_P, CR_MAX_P);
    in_xs     = in_range(d_addr, XS_MIN_P, XS_MAX_P);
    in_mr     = in_range(d_addr, MAC_ADDR_P, MR_MAX);
    in_ctr    = VRF_AUTH && in_range(d_addr, CTR_MIN_P, CTR_MAX_P);
    violation = (!pc_in_cr && (r_en || w_en) && in_xs)
             || ( pc_in_cr && w_en && !in_xs && !in_mr && !in_ctr);
  end

  always_comb begin
    state_nxt = state;
    unique case (state)
      MON_RUN:   if (violation) state_nxt = MON_RESET;
      MON_RESET: if (pc == RESET_PC && !violation) state_nxt = MON_RUN;
      default:   state_nxt = MON_RESET;
    endcase
  end

  assign reset = (state_nxt == MON_RESET);

  // The rule itself: a violating cycle always raises reset.
  a_rule: assert property (@(posedge clk) violation |-> reset);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) state <= MON_RESET;
    else        state <= state_nxt;

endmodule
