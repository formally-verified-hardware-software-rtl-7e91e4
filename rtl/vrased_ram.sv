// vrased_ram -- read/write memory used for the data RAM and for flash.
//
// In the VRASED memory layout the RAM holds the MAC/challenge buffer MR, the
// exclusive stack XS of SW-Att and the application's RAM; flash holds the
// application code. Both are plain read/write memories, so one module serves
// both, sized by BYTES. Storage is an array of 16-bit words of two bytes
// each, written byte-wise under the byte enables.
//
// Interface: N_PORTS request ports (fetch, CPU data, DMA), each a mem_req_t
// whose addr is a word index inside this memory, and one read-data output per
// port. Timing: synchronous; a read enabled at a clock edge returns its word
// after that edge (one cycle of latency), returning the word as it was before
// any write of the same edge. If two ports write one byte in the same cycle,
// the lower-numbered port (the CPU before DMA) wins.
// Everything here is this implementation's choice: the design only names
// the memories and their contents.
module vrased_ram
  import vrased_pkg::*;
#(
  parameter int unsigned BYTES = RAM_BYTES
) (
  input  logic     clk,
  input  mem_req_t req   [N_PORTS],
  output data_t    rdata [N_PORTS]
);

  localparam int unsigned WORDS = BYTES / 2;
  localparam int unsigned AW    = (WORDS > 1) ? $clog2(WORDS) : 1;

  logic [1:0][7:0] mem [WORDS];

  // Writes: the highest port first, so a lower port's write lands last.
  always_ff @(posedge clk)
    for (int p = N_PORTS - 1; p >= 0; p--)
      if (req[p].en && req[p].we)
        for (int b = 0; b < 2; b++)
          if (req[p].be[b]) mem[req[p].addr[AW-1:0]][b] <= req[p].wdata[8*b +: 8];

  // Reads: one registered output per port.
  always_ff @(posedge clk)
    for (int p = 0; p < N_PORTS; p++)
      if (req[p].en) rdata[p] <= mem[req[p].addr[AW-1:0]];

endmodule
