// vrased_mem_backbone -- address decoder and data multiplexer joining the
// core and the DMA controller to ROM, RAM and flash.
//
// Adding VRASED to the MCU adds the ROM (key and SW-Att) to the memory map,
// so the memory backbone must route each access to the right memory. Three
// masters share the memories:
//   fetch  instruction fetch at PC (read only)
//   CPU    data access: d_addr, r_en, w_en, byte enables, write data
//   DMA    DMA access: dma_addr, dma_en, dma_we, byte enables, write data
// Each master's byte address is decoded into ROM, RAM, flash or nothing, and
// turned into a request on that memory's port for this master, carrying the
// word index inside the memory. Writes aimed at ROM (or at no memory) are
// dropped. The region decoded for each master is registered so that the
// read data returned one cycle later comes from the memory that was read;
// reads of unmapped addresses return zero.
//
// Timing: requests are combinational from the master's signals; read data
// arrives in the cycle after the request (the memories' one-cycle latency).
// The backbone does not police access rights: that is HW-Mod's job, which
// reboots the core on a violation. The whole block is this implementation's
// choice; the design states only that the backbone multiplexes the regions.
//
// Synthesis finds about half of the request output bits constant: the fetch
// port's we/be/wdata (fetch never writes), the ROM ports' we (ROM is never
// written) and the top word-index bits that a memory smaller than 64 KB
// never uses. They are kept so that every memory sees the same mem_req_t
// port bundle; the memories ignore what they do not need.
module vrased_mem_backbone
  import vrased_pkg::*;
#(
  parameter addr_t       ROM_BASE_P    = ROM_BASE,
  parameter int unsigned ROM_BYTES_P   = ROM_BYTES,
  parameter addr_t       RAM_BASE_P    = RAM_BASE,
  parameter int unsigned RAM_BYTES_P   = RAM_BYTES,
  parameter addr_t       FLASH_BASE_P  = FLASH_BASE,
  parameter int unsigned FLASH_BYTES_P = FLASH_BYTES
) (
  input  logic       clk,
  input  logic       rst_n,
  // instruction fetch
  input  addr_t      pc,
  output data_t      instr,
  // CPU data port
  input  logic       r_en,
  input  logic       w_en,
  input  logic [1:0] d_be,
  input  addr_t      d_addr,
  input  data_t      d_wdata,
  output data_t      d_rdata,
  // DMA port
  input  logic       dma_en,
  input  logic       dma_we,
  input  logic [1:0] dma_be,
  input  addr_t      dma_addr,
  input  data_t      dma_wdata,
  output data_t      dma_rdata,
  // memories
  output mem_req_t   rom_req     [N_PORTS],
  input  data_t      rom_rdata   [N_PORTS],
  output mem_req_t   ram_req     [N_PORTS],
  input  data_t      ram_rdata   [N_PORTS],
  output mem_req_t   flash_req   [N_PORTS],
  input  data_t      flash_rdata [N_PORTS]
);

  // Byte address -> region. Regions are [BASE, BASE + BYTES - 1].
  function automatic region_e decode(addr_t a);
    if      (32'(a) >= 32'(ROM_BASE_P)   && 32'(a) < 32'(ROM_BASE_P)   + ROM_BYTES_P)   return REG_ROM;
    else if (32'(a) >= 32'(RAM_BASE_P)   && 32'(a) < 32'(RAM_BASE_P)   + RAM_BYTES_P)   return REG_RAM;
    else if (32'(a) >= 32'(FLASH_BASE_P) && 32'(a) < 32'(FLASH_BASE_P) + FLASH_BYTES_P) return REG_FLASH;
    else                                                                                  return REG_NONE;
  endfunction

  function automatic addr_t base_of(region_e r);
    unique case (r)
      REG_ROM:   return ROM_BASE_P;
      REG_RAM:   return RAM_BASE_P;
      REG_FLASH: return FLASH_BASE_P;
      default:   return '0;
    endcase
  endfunction

  // Per-master request, before routing.
  mem_req_t m_req [N_PORTS];
  region_e  m_reg [N_PORTS];
  region_e  m_reg_q [N_PORTS];

  always_comb begin
    m_req[PORT_FETCH] = '{en: 1'b1,   we: 1'b0,  be: 2'b11,  addr: pc,       wdata: '0};
    m_req[PORT_CPU]   = '{en: r_en || w_en, we: w_en, be: d_be, addr: d_addr, wdata: d_wdata};
    m_req[PORT_DMA]   = '{en: dma_en, we: dma_we, be: dma_be, addr: dma_addr, wdata: dma_wdata};
    for (int p = 0; p < N_PORTS; p++) m_reg[p] = decode(m_req[p].addr);
  end

  // Route every master to the port it owns on the selected memory.
  always_comb begin
    for (int p = 0; p < N_PORTS; p++) begin
      mem_req_t r;
      r      = m_req[p];
      r.addr = addr_t'((m_req[p].addr - base_of(m_reg[p])) >> 1);
      rom_req[p]   = r;
      ram_req[p]   = r;
      flash_req[p] = r;
      rom_req[p].en   = m_req[p].en && (m_reg[p] == REG_ROM);
      rom_req[p].we   = 1'b0;                       // ROM is read only
      ram_req[p].en   = m_req[p].en && (m_reg[p] == REG_RAM);
      flash_req[p].en = m_req[p].en && (m_reg[p] == REG_FLASH);
    end
  end

  // Remember which memory each master read, for the data returned next cycle.
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)
      for (int p = 0; p < N_PORTS; p++) m_reg_q[p] <= REG_NONE;
    else
      for (int p = 0; p < N_PORTS; p++)
        m_reg_q[p] <= (m_req[p].en && !m_req[p].we) ? m_reg[p] : REG_NONE;

  function automatic data_t pick(region_e r, data_t d_rom, data_t d_ram, data_t d_flash);
    unique case (r)
      REG_ROM:   return d_rom;
      REG_RAM:   return d_ram;
      REG_FLASH: return d_flash;
      default:   return '0;
    endcase
  endfunction

  assign instr     = pick(m_reg_q[PORT_FETCH], rom_rdata[PORT_FETCH], ram_rdata[PORT_FETCH], flash_rdata[PORT_FETCH]);
  assign d_rdata   = pick(m_reg_q[PORT_CPU],   rom_rdata[PORT_CPU],   ram_rdata[PORT_CPU],   flash_rdata[PORT_CPU]);
  assign dma_rdata = pick(m_reg_q[PORT_DMA],   rom_rdata[PORT_DMA],   ram_rdata[PORT_DMA],   flash_rdata[PORT_DMA]);

endmodule
