// vrased_hwmod -- HW-Mod, the hardware half of VRASED.
//
// Four independent monitors watch the core: key access control (rst1),
// atomicity and controlled invocation (rst2), exclusive stack (rst3) and DMA
// protection (rst4). Each one alone enforces a subset of the security rules,
// so their composition is just the logical OR of their reset requests:
//     reset = rst1 | rst2 | rst3 | rst4
// `reset` goes to the MCU core and reboots it before the next instruction.
// Because every monitor holds its request until PC = 0, so does the OR
// (secure reset, property P3).
//
// Inputs: the seven core signals PC, irq, R_en, W_en, D_addr, DMA_en,
// DMA_addr, plus clock and a power-on reset. Outputs: `reset` and, for
// observation, the four individual requests in `rst_vec` (bit 0 = rst1).
// Timing: combinational from the inputs to `reset` (Mealy), one state
// register per monitor. The composition and the names rst1..rst4 follow the
// design; the observation port and rst_n are this implementation's own.
module vrased_hwmod
  import vrased_pkg::*;
#(
  parameter addr_t       CR_MIN_P   = CR_MIN,
  parameter addr_t       CR_MAX_P   = CR_MAX,
  parameter addr_t       K_MIN_P    = K_MIN,
  parameter addr_t       K_MAX_P    = K_MAX,
  parameter addr_t       XS_MIN_P   = XS_MIN,
  parameter addr_t       XS_MAX_P   = XS_MAX,
  parameter addr_t       MAC_ADDR_P = MAC_ADDR,
  parameter int unsigned MAC_SIZE_P = MAC_SIZE,
  parameter addr_t       CTR_MIN_P  = CTR_MIN,
  parameter addr_t       CTR_MAX_P  = CTR_MAX,
  parameter bit          VRF_AUTH   = 1'b0
) (
  input  logic       clk,
  input  logic       rst_n,
  input  addr_t      pc,
  input  logic       irq,
  input  logic       r_en,
  input  logic       w_en,
  input  addr_t      d_addr,
  input  logic       dma_en,
  input  addr_t      dma_addr,
  output logic       reset,
  output logic [3:0] rst_vec
);

  logic rst1, rst2, rst3, rst4;

  vrased_key_ac #(
    .CR_MIN_P(CR_MIN_P), .CR_MAX_P(CR_MAX_P), .K_MIN_P(K_MIN_P), .K_MAX_P(K_MAX_P),
    .CTR_MIN_P(CTR_MIN_P), .CTR_MAX_P(CTR_MAX_P), .VRF_AUTH(VRF_AUTH)
  ) u_key_ac (
    .clk, .rst_n, .pc, .r_en, .w_en, .d_addr, .reset(rst1)
  );

  vrased_atomicity #(
    .CR_MIN_P(CR_MIN_P), .CR_MAX_P(CR_MAX_P)
  ) u_atomicity (
    .clk, .rst_n, .pc, .irq, .reset(rst2)
  );

  vrased_x_stack #(
    .CR_MIN_P(CR_MIN_P), .CR_MAX_P(CR_MAX_P), .XS_MIN_P(XS_MIN_P), .XS_MAX_P(XS_MAX_P),
    .MAC_ADDR_P(MAC_ADDR_P), .MAC_SIZE_P(MAC_SIZE_P),
    .CTR_MIN_P(CTR_MIN_P), .CTR_MAX_P(CTR_MAX_P), .VRF_AUTH(VRF_AUTH)
  ) u_x_stack (
    .clk, .rst_n, .pc, .r_en, .w_en, .d_addr, .reset(rst3)
  );

  vrased_dma #(
    .CR_MIN_P(CR_MIN_P), .CR_MAX_P(CR_MAX_P), .K_MIN_P(K_MIN_P), .K_MAX_P(K_MAX_P),
    .XS_MIN_P(XS_MIN_P), .XS_MAX_P(XS_MAX_P),
    .CTR_MIN_P(CTR_MIN_P), .CTR_MAX_P(CTR_MAX_P), .VRF_AUTH(VRF_AUTH)
  ) u_dma (
    .clk, .rst_n, .pc, .dma_en, .dma_addr, .reset(rst4)
  );

  assign rst_vec = {rst4, rst3, rst2, rst1};
  assign reset   = rst1 | rst2 | rst3 | rst4;

  // Secure reset (P3): once raised, reset is released only when PC = 0.
  a_secure_reset: assert property (@(posedge clk)
    reset |=> reset || pc == RESET_PC);

endmodule
