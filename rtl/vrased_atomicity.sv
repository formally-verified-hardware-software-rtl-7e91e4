// vrased_atomicity -- atomicity and controlled-invocation monitor of HW-Mod
// (properties P6 and P7).
//
// SW-Att must be entered only at its first instruction CR_MIN, left only from
// its last instruction CR_MAX, and never interrupted. A five-state Mealy
// machine tracks where PC was in the previous cycle:
//   notCR   PC outside CR           fstCR   PC = CR_MIN
//   midCR   CR_MIN < PC < CR_MAX     lastCR  PC = CR_MAX
//   Reset   a violation was seen; left only when PC = 0
// Allowed moves (all others go to Reset):
//   notCR  -> notCR  : PC outside CR          (irq allowed outside CR)
//   notCR  -> fstCR  : PC = CR_MIN  && !irq
//   fstCR  -> fstCR  : PC = CR_MIN  && !irq
//   fstCR  -> midCR  : PC inside CR, not first/last, && !irq
//   midCR  -> midCR  : same
//   midCR  -> lastCR : PC = CR_MAX  && !irq
//   lastCR -> lastCR : PC = CR_MAX  && !irq
//   lastCR -> notCR  : PC outside CR && !irq
//   Reset  -> notCR  : PC = 0
// So the only path from notCR into midCR is through fstCR and the only path
// back out is through lastCR. `reset` is high in every cycle whose next state
// is Reset: on the violating transition and while Reset is held.
//
// Interface: pc and irq sampled every clock; `reset` combinational (Mealy).
// Three concurrent assertions restate the exit, entry and interrupt rules.
// Follows the design: the states and every transition. Own choices: the
// power-on reset rst_n puts the machine in Reset, so after power-up `reset`
// is held until the core shows PC = 0; the state encoding.
module vrased_atomicity
  import vrased_pkg::*;
#(
  parameter addr_t CR_MIN_P = CR_MIN,
  parameter addr_t CR_MAX_P = CR_MAX
) (
  input  logic  clk,
  input  logic  rst_n,
  input  addr_t pc,
  input  logic  irq,
  output logic  reset
);

  atom_state_e state, state_nxt;
  logic pc_out, pc_fst, pc_mid, pc_lst;

  always_comb begin
    pc_fst = (pc == CR_MIN_P);
    pc_lst = (pc == CR_MAX_P);
    pc_mid = (pc > CR_MIN_P) && (pc < CR_MAX_P);
    pc_out = (pc < CR_MIN_P) || (pc > CR_MAX_P);
  end

  always_comb begin
    state_nxt = AT_RESET;
    unique case (state)
      AT_RESET:  state_nxt = (pc == RESET_PC) ? AT_NOTCR : AT_RESET;
      AT_NOTCR:  if (pc_out)               state_nxt = AT_NOTCR;
                 else if (pc_fst && !irq)  state_nxt = AT_FSTCR;
      AT_FSTCR:  if (pc_fst && !irq)       state_nxt = AT_FSTCR;
                 else if (pc_mid && !irq)  state_nxt = AT_MIDCR;
      AT_MIDCR:  if (pc_mid && !irq)       state_nxt = AT_MIDCR;
                 else if (pc_lst && !irq)  state_nxt = AT_LASTCR;
      AT_LASTCR: if (pc_lst && !irq)       state_nxt = AT_LASTCR;
                 else if (pc_out && !irq)  state_nxt = AT_NOTCR;
      default:   state_nxt = AT_RESET;
    endcase
  end

  assign reset = (state_nxt == AT_RESET);

  // The three rules this machine exists for, stated on its ports:
  // leaving CR only from CR_MAX, entering CR only at CR_MIN, no irq in CR.
  logic pc_in_cr;
  assign pc_in_cr = !pc_out;

  a_exit_at_last: assert property (@(posedge clk)
    (!reset && pc_in_cr) |=> (pc_in_cr || reset || $past(pc) == CR_MAX_P));
  a_enter_at_first: assert property (@(posedge clk)
    (!reset && !pc_in_cr) |=> (!pc_in_cr || reset || pc == CR_MIN_P));
  a_no_irq_in_cr: assert property (@(posedge clk)
    (irq && pc_in_cr) |-> reset);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) state <= AT_RESET;
    else        state <= state_nxt;

endmodule
