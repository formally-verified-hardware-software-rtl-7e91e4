// vrased_rom -- the read-only memory holding the key K and SW-Att.
//
// The key region KR and the attestation code CR live in ROM, which makes both
// immutable (property P5) without any further hardware. The image (key
// followed by the compiled attestation routine) is loaded once from the hex
// file INIT_FILE, one 16-bit word per line; with no file the ROM reads as
// zero. Nothing can write it: the backbone never issues ROM writes, which an
// assertion checks.
//
// Interface: N_PORTS read ports (fetch, CPU data, DMA) as mem_req_t; only en
// and addr (word index) are used. Timing: synchronous read, one cycle of
// latency, like vrased_ram.
// Follows the design: ROM location of K and SW-Att. Own choices: size (8 KB,
// enough for the ~4.5 KB image the design reports), hex-file loading, ports.
module vrased_rom
  import vrased_pkg::*;
#(
  parameter int unsigned BYTES     = ROM_BYTES,
  parameter string       INIT_FILE = ""
) (
  input  logic     clk,
  input  mem_req_t req   [N_PORTS],
  output data_t    rdata [N_PORTS]
);

  localparam int unsigned WORDS = BYTES / 2;
  localparam int unsigned AW    = (WORDS > 1) ? $clog2(WORDS) : 1;

  data_t mem [WORDS];

  initial begin
    for (int i = 0; i < WORDS; i++) mem[i] = '0;
    if (INIT_FILE != "") $readmemh(INIT_FILE, mem);
  end

  always_ff @(posedge clk)
    for (int p = 0; p < N_PORTS; p++)
      if (req[p].en) rdata[p] <= mem[req[p].addr[AW-1:0]];

  for (genvar p = 0; p < N_PORTS; p++) begin : g_ro
    a_no_write: assert property (@(posedge clk) !(req[p].en && req[p].we));
  end

endmodule
