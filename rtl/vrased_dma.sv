// vrased_dma -- DMA protection monitor of HW-Mod.
//
// A DMA controller reaches memory on its own bus (DMA_en, DMA_addr), which the
// CPU-side monitors do not see. This two-state Mealy machine (Run, Reset)
// requests a reset when
//     DMA_en && (DMA_addr in KR)       (DMA reads the key)
//  || DMA_en && (DMA_addr in XS)       (DMA reads SW-Att's stack)
//  || DMA_en && (PC in CR)             (any DMA while SW-Att runs)
// and, with VRF_AUTH = 1, DMA_en && (DMA_addr in CTR). `reset` rises in the
// violating cycle and stays high until PC = 0.
//
// Interface and timing as vrased_key_ac. Follows the design: the three rules
// (plus the optional CTR rule), two states and the PC = 0 exit. Own choices:
// power-on reset enters Reset; leaving Reset also needs a violation-free cycle.
module vrased_dma
  import vrased_pkg::*;
#(
  parameter addr_t CR_MIN_P  = CR_MIN,
  parameter addr_t CR_MAX_P  = CR_MAX,
  parameter addr_t K_MIN_P   = K_MIN,
  parameter addr_t K_MAX_P   = K_MAX,
  parameter addr_t XS_MIN_P  = XS_MIN,
  parameter addr_t XS_MAX_P  = XS_MAX,
  parameter addr_t CTR_MIN_P = CTR_MIN,
  parameter addr_t CTR_MAX_P = CTR_MAX,
  parameter bit    VRF_AUTH  = 1'b0
) (
  input  logic  clk,
  input  logic  rst_n,
  input  addr_t pc,
  input  logic  dma_en,
  input  addr_t dma_addr,
  output logic  reset
);

  mon_state_e state, state_nxt;
  logic violation;

  always_comb begin
    violation = dma_en && ( in_range(dma_addr, K_MIN_P, K_MAX_P)
                         || in_range(dma_addr, XS_MIN_P, XS_MAX_P)
                         || in_range(pc, CR_MIN_P, CR_MAX_P)
                         || (VRF_AUTH && in_range(dma_addr, CTR_MIN_P, CTR_MAX_P)));
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
