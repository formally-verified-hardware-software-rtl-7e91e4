// vrased_pkg -- types, memory map and helpers shared by the VRASED RTL.
//
// VRASED protects a hybrid remote-attestation routine (SW-Att) on a small
// 16-bit MSP430-class microcontroller with a hardware monitor (HW-Mod). The
// monitor only watches core signals (PC, irq, data read/write enables, data
// address, DMA enable and DMA address) and requests an MCU reset when a
// security rule is broken. The regions it guards are named as in the design:
//   CR  code ROM holding SW-Att          [CR_MIN, CR_MAX]
//   KR  key ROM holding the key K        [K_MIN,  K_MAX]
//   XS  exclusive stack of SW-Att (RAM)  [XS_MIN, XS_MAX]
//   MR  MAC/challenge buffer (RAM)       [MAC_ADDR, MAC_ADDR+MAC_SIZE-1]
//   CTR counter of the optional verifier-authentication variant (flash)
// The 16-bit byte address space, the 64-byte key, the 32-byte MAC, the
// 2,332-byte exclusive stack ending just below 0x1000 (the stack pointer
// is set to 0x1000 before SW-Att is called) and the ~4.5 KB ROM come from
// the design description. The base addresses of ROM, flash, MR and CTR, and
// the RAM and flash sizes, are this implementation's choice.
package vrased_pkg;

  localparam int unsigned ADDR_W = 16;
  localparam int unsigned DATA_W = 16;

  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [DATA_W-1:0] data_t;

  // ---------------- memory map (byte addresses) ----------------
  // Data RAM: 16 KB at 0x0200 (below 0x0200 are the core's peripherals).
  localparam addr_t       RAM_BASE   = 16'h0200;
  localparam int unsigned RAM_BYTES  = 16384;
  // MR: 32-byte challenge in / HMAC out buffer at the bottom of RAM.
  localparam addr_t       MAC_ADDR   = 16'h0200;
  localparam int unsigned MAC_SIZE   = 32;
  // XS: 2,332 bytes ending at 0x0FFF (stack grows down from 0x1000).
  localparam addr_t       XS_MIN     = 16'h06E4;
  localparam addr_t       XS_MAX     = 16'h0FFF;
  // ROM: 8 KB at 0xA000; the key first, SW-Att code right after it.
  localparam addr_t       ROM_BASE   = 16'hA000;
  localparam int unsigned ROM_BYTES  = 8192;
  localparam addr_t       K_MIN      = 16'hA000;
  localparam addr_t       K_MAX      = 16'hA03F;
  localparam addr_t       CR_MIN     = 16'hA040;
  localparam addr_t       CR_MAX     = 16'hB192;   // 4,436 bytes of code, last word
  // Flash: 16 KB of application code at the top of the address space.
  localparam addr_t       FLASH_BASE  = 16'hC000;
  localparam int unsigned FLASH_BYTES = 16384;
  // CTR: 32-byte counter in flash, used only when VRF_AUTH = 1.
  localparam addr_t       CTR_MIN    = 16'hFF00;
  localparam addr_t       CTR_MAX    = 16'hFF1F;

  // Address the core's reset sequence leaves in PC (axiom A4).
  localparam addr_t       RESET_PC   = 16'h0000;

  // State of the two-state monitors (key AC, exclusive stack, DMA).
  typedef enum logic {
    MON_RUN   = 1'b0,
    MON_RESET = 1'b1
  } mon_state_e;

  // State of the atomicity / controlled-invocation monitor.
  typedef enum logic [2:0] {
    AT_RESET  = 3'd0,
    AT_NOTCR  = 3'd1,
    AT_FSTCR  = 3'd2,
    AT_MIDCR  = 3'd3,
    AT_LASTCR = 3'd4
  } atom_state_e;

  // Memory region selected by the backbone's address decoder.
  typedef enum logic [1:0] {
    REG_NONE  = 2'd0,
    REG_ROM   = 2'd1,
    REG_RAM   = 2'd2,
    REG_FLASH = 2'd3
  } region_e;

  // The three ports every memory offers: instruction fetch (addressed by
  // PC), CPU data access, DMA access.
  localparam int unsigned N_PORTS   = 3;
  localparam int unsigned PORT_FETCH = 0;
  localparam int unsigned PORT_CPU   = 1;
  localparam int unsigned PORT_DMA   = 2;

  // One access port of a memory, as driven by the backbone. addr is the
  // word index inside that memory; be[0] is the even (low) byte.
  typedef struct packed {
    logic        en;
    logic        we;
    logic [1:0]  be;
    addr_t       addr;
    data_t       wdata;
  } mem_req_t;

  // C in [A,B]  <=>  A <= C <= B
  function automatic logic in_range(addr_t a, addr_t lo, addr_t hi);
    return (a >= lo) && (a <= hi);
  endfunction

endpackage
