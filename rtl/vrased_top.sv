// vrased_top -- VRASED system around an MSP430-class core: HW-Mod, the memory
// backbone, ROM (key + SW-Att), data RAM (MR, XS, application RAM) and flash
// (application code).
//
// The core and the DMA controller are outside this module; their signals are
// its ports. The core fetches at `pc` and receives `instr` one cycle later,
// performs data accesses with r_en/w_en/d_addr/d_be/d_wdata and receives
// `d_rdata` one cycle later; the DMA controller does the same on its own
// port. HW-Mod watches PC, irq, R_en, W_en, D_addr, DMA_en and DMA_addr and
// drives `reset`, which must reboot the core (all registers and PC to 0)
// before its next instruction. `rst_vec` shows which monitor asked for the
// reset (bit 0 key access control, 1 atomicity, 2 exclusive stack, 3 DMA).
//
// Memory map (byte addresses; see vrased_pkg):
//   0x0200-0x41FF  RAM 16 KB: MR 0x0200-0x021F, XS 0x06E4-0x0FFF
//   0xA000-0xBFFF  ROM  8 KB: KR 0xA000-0xA03F, CR 0xA040-0xB192
//   0xC000-0xFFFF  flash 16 KB (application code; CTR 0xFF00-0xFF1F)
// The ROM image comes from ROM_INIT_FILE (empty: all zero). VRF_AUTH = 1
// turns on the optional verifier-authentication rules for CTR.
//
// Structure and signals follow the design's architecture; the memory map,
// the memory timing and the data/DMA port details are this implementation's.
module vrased_top
  import vrased_pkg::*;
#(
  parameter string ROM_INIT_FILE = "",
  parameter bit    VRF_AUTH      = 1'b0
) (
  input  logic       clk,
  input  logic       rst_n,
  // MCU core
  input  addr_t      pc,
  input  logic       irq,
  output data_t      instr,
  input  logic       r_en,
  input  logic       w_en,
  input  logic [1:0] d_be,
  input  addr_t      d_addr,
  input  data_t      d_wdata,
  output data_t      d_rdata,
  // DMA controller
  input  logic       dma_en,
  input  logic       dma_we,
  input  logic [1:0] dma_be,
  input  addr_t      dma_addr,
  input  data_t      dma_wdata,
  output data_t      dma_rdata,
  // to the MCU core
  output logic       reset,
  output logic [3:0] rst_vec
);

  mem_req_t rom_req   [N_PORTS], ram_req   [N_PORTS], flash_req   [N_PORTS];
  data_t    rom_rdata [N_PORTS], ram_rdata [N_PORTS], flash_rdata [N_PORTS];

  vrased_hwmod #(.VRF_AUTH(VRF_AUTH)) u_hwmod (
    .clk, .rst_n, .pc, .irq, .r_en, .w_en, .d_addr, .dma_en, .dma_addr,
    .reset, .rst_vec
  );

  vrased_mem_backbone u_backbone (
    .clk, .rst_n,
    .pc, .instr,
    .r_en, .w_en, .d_be, .d_addr, .d_wdata, .d_rdata,
    .dma_en, .dma_we, .dma_be, .dma_addr, .dma_wdata, .dma_rdata,
    .rom_req, .rom_rdata, .ram_req, .ram_rdata, .flash_req, .flash_rdata
  );

  vrased_rom #(.BYTES(ROM_BYTES), .INIT_FILE(ROM_INIT_FILE)) u_rom (
    .clk, .req(rom_req), .rdata(rom_rdata)
  );

  vrased_ram #(.BYTES(RAM_BYTES)) u_ram (
    .clk, .req(ram_req), .rdata(ram_rdata)
  );

  vrased_ram #(.BYTES(FLASH_BYTES)) u_flash (
    .clk, .req(flash_req), .rdata(flash_rdata)
  );

endmodule
