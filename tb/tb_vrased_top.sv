// tb_vrased_top -- end-to-end test of the VRASED system at its default size.
//
// The testbench plays the MCU core and the DMA controller around vrased_top:
// it drives PC, irq and the data and DMA ports cycle by cycle, reboots
// (returns PC to 0) whenever `reset` is raised, and checks every word read
// against a reference copy of memory. The ROM is loaded with a test image
// (256 words, word i = (i * 0x9E37) ^ (i << 3) ^ 0x5A5A, words 0-31 being
// the key; the rest of the ROM reads zero).
// Scenario:
//   1. power-up: reset held until PC = 0;
//   2. the application writes a challenge into MR, data into RAM and flash,
//      and runs DMA to and from application RAM;
//   3. a legal SW-Att run: enter at CR_MIN, fetch code, read the key, use the
//      exclusive stack, read the attested region, write the MAC into MR,
//      leave from CR_MAX; no reset may occur;
//   4. one attack per rule: the right monitor must fire, reset must be held
//      until PC = 0, and ROM writes must leave the ROM unchanged.
// Every mechanism is counted and must occur at least once.
module tb_vrased_top;
  import vrased_pkg::*;

  logic       clk = 1'b0, rst_n = 1'b0;
  addr_t      pc = '0, d_addr = '0, dma_addr = '0;
  logic       irq = 1'b0, r_en = 1'b0, w_en = 1'b0, dma_en = 1'b0, dma_we = 1'b0;
  logic [1:0] d_be = 2'b11, dma_be = 2'b11;
  data_t      d_wdata = '0, dma_wdata = '0;
  data_t      instr, d_rdata, dma_rdata;
  logic       reset;
  logic [3:0] rst_vec;
  int         checks = 0, failures = 0;

  vrased_top dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Mechanism counters.
  typedef enum int {
    M_POWERUP, M_RELEASE, M_ATTEST, M_KEYREAD_OK, M_XS_OK, M_MR_WRITE, M_DMA_OK, M_FETCH_ROM,
    M_ROM_IMMUTABLE, M_KEY_AC, M_BAD_ENTRY, M_BAD_EXIT, M_IRQ, M_XS_APP, M_XS_ATT_WRITE,
    M_DMA_KEY, M_DMA_XS, M_DMA_ATT, M_COUNT
  } mech_e;
  int n_mech [M_COUNT];

  data_t ref_mem [int];      // byte address (even) -> word

  function automatic data_t rom_image(int i);
    if (i >= 256) return '0;                  // beyond the test image
    return data_t'((i * 32'h9E37) ^ (i << 3) ^ 32'h5A5A);
  endfunction

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t: got %h exp %h", what, $time, got, exp);
    end
  endtask

  task automatic idle_inputs();
    irq = 1'b0; r_en = 1'b0; w_en = 1'b0; dma_en = 1'b0; dma_we = 1'b0;
    d_be = 2'b11; dma_be = 2'b11;
  endtask

  // One clock: inputs are already set; check reset, then step.
  task automatic tick(logic exp_reset);
    #1;
    check("reset", reset, exp_reset);
    @(posedge clk);
    #1;
  endtask

  task automatic cpu_write(addr_t p, addr_t a, data_t d);
    idle_inputs(); pc = p; w_en = 1'b1; d_addr = a; d_wdata = d;
    tick(1'b0);
    ref_mem[int'(a)] = d;
  endtask

  task automatic cpu_read(addr_t p, addr_t a, data_t exp);
    idle_inputs(); pc = p; r_en = 1'b1; d_addr = a;
    tick(1'b0);
    check($sformatf("read %h", a), d_rdata, exp);
  endtask

  // A violation cycle, then the core's reboot: reset must name the right
  // monitor, stay high while PC != 0 and drop once PC = 0.
  task automatic violate_and_reboot(mech_e m, int monitor);
    #1;
    check("violation reset", reset, 1'b1);
    check("violation monitor", rst_vec[monitor], 1'b1);
    @(posedge clk);
    #1;
    idle_inputs();
    n_mech[m]++;
    for (int i = 0; i < 3; i++) begin
      pc = addr_t'(16'hC100 + 2 * i);
      tick(1'b1);
    end
    pc = RESET_PC;
    tick(1'b0);
    n_mech[M_RELEASE]++;
  endtask

  // A legal SW-Att run touching the key, XS, the attested region and MR.
  task automatic attest(addr_t ar_min, int ar_words);
    addr_t p = CR_MIN;
    idle_inputs(); pc = CR_MIN;
    tick(1'b0);
    check("fetch CR_MIN", instr, rom_image(int'(CR_MIN - ROM_BASE) / 2));
    n_mech[M_FETCH_ROM]++;
    // key -> XS copy
    for (int i = 0; i < 32; i++) begin
      p = addr_t'(CR_MIN + 2 + 2 * (i % 64));
      cpu_read(p, addr_t'(K_MIN + 2 * i), rom_image(i));
      n_mech[M_KEYREAD_OK]++;
      cpu_write(p, addr_t'(XS_MAX - 1 - 2 * i), rom_image(i) ^ 16'hFFFF);
    end
    for (int i = 0; i < 32; i++) begin
      cpu_read(addr_t'(CR_MIN + 200), addr_t'(XS_MAX - 1 - 2 * i), rom_image(i) ^ 16'hFFFF);
      n_mech[M_XS_OK]++;
    end
    // attested region
    for (int i = 0; i < ar_words; i++) begin
      addr_t a = addr_t'(ar_min + 2 * i);
      cpu_read(addr_t'(CR_MIN + 300), a, ref_mem.exists(int'(a)) ? ref_mem[int'(a)] : 16'h0000);
    end
    // MAC into MR
    for (int i = 0; i < MAC_SIZE / 2; i++) begin
      cpu_write(addr_t'(CR_MIN + 400), addr_t'(MAC_ADDR + 2 * i), data_t'(16'hAC00 + i));
      n_mech[M_MR_WRITE]++;
    end
    idle_inputs(); pc = CR_MAX;
    tick(1'b0);
    check("fetch CR_MAX", instr, rom_image(int'(CR_MAX - ROM_BASE) / 2));
    pc = 16'hC400;
    tick(1'b0);
    n_mech[M_ATTEST]++;
  endtask

  initial begin
    $readmemh("tb/tb_vrased_rom.hex", dut.u_rom.mem);
    foreach (n_mech[i]) n_mech[i] = 0;
    idle_inputs();
    pc = 16'hC000;
    repeat (2) @(posedge clk);
    #1;
    check("reset at power-up", reset, 1'b1);
    rst_n = 1'b1;
    // 1. power-up
    tick(1'b1);
    pc = RESET_PC;
    tick(1'b0);
    n_mech[M_POWERUP]++;
    // 2. application traffic
    for (int i = 0; i < MAC_SIZE / 2; i++) cpu_write(16'hC010, addr_t'(MAC_ADDR + 2 * i), data_t'(16'h1100 + i));
    for (int i = 0; i < 64; i++) cpu_write(16'hC020, addr_t'(16'h1000 + 2 * i), data_t'($urandom));
    for (int i = 0; i < 8; i++)  cpu_write(16'hC030, addr_t'(16'hE000 + 2 * i), data_t'($urandom));
    for (int i = 0; i < 8; i++)  cpu_read(16'hC040, addr_t'(16'hE000 + 2 * i), ref_mem[16'hE000 + 2 * i]);
    for (int i = 0; i < 8; i++) begin
      idle_inputs(); pc = 16'hC050; dma_en = 1'b1; dma_we = 1'b1;
      dma_addr = addr_t'(16'h3000 + 2 * i); dma_wdata = data_t'(16'hD000 + i);
      tick(1'b0);
      ref_mem[16'h3000 + 2 * i] = data_t'(16'hD000 + i);
    end
    for (int i = 0; i < 8; i++) begin
      idle_inputs(); pc = 16'hC052; dma_en = 1'b1; dma_addr = addr_t'(16'h3000 + 2 * i);
      tick(1'b0);
      check("dma read", dma_rdata, data_t'(16'hD000 + i));
      n_mech[M_DMA_OK]++;
    end
    // ROM write by the application: no reset (not a rule), ROM unchanged.
    cpu_write(16'hC060, 16'hA100, 16'hDEAD);
    ref_mem.delete(int'(16'hA100));
    cpu_read(16'hC062, 16'hA100, rom_image(16'h80));
    n_mech[M_ROM_IMMUTABLE]++;
    // 3. legal attestation of 128 bytes at 0x1000, then the MAC is readable.
    attest(16'h1000, 64);
    for (int i = 0; i < MAC_SIZE / 2; i++) cpu_read(16'hC070, addr_t'(MAC_ADDR + 2 * i), data_t'(16'hAC00 + i));
    // 4. attacks
    idle_inputs(); pc = 16'hC080; r_en = 1'b1; d_addr = K_MIN;             violate_and_reboot(M_KEY_AC, 0);
    idle_inputs(); pc = 16'hA200;                                            violate_and_reboot(M_BAD_ENTRY, 1);
    idle_inputs(); pc = CR_MIN; tick(1'b0); pc = 16'hA300; tick(1'b0);
    pc = 16'hC090;                                                           violate_and_reboot(M_BAD_EXIT, 1);
    idle_inputs(); pc = CR_MIN; tick(1'b0); pc = 16'hA300; irq = 1'b1;       violate_and_reboot(M_IRQ, 1);
    idle_inputs(); pc = 16'hC0A0; r_en = 1'b1; d_addr = 16'h0800;           violate_and_reboot(M_XS_APP, 2);
    idle_inputs(); pc = CR_MIN; tick(1'b0);
    pc = 16'hA400; w_en = 1'b1; d_addr = 16'h1000; d_wdata = 16'hBAD0;       violate_and_reboot(M_XS_ATT_WRITE, 2);
    idle_inputs(); pc = 16'hC0B0; dma_en = 1'b1; dma_addr = K_MAX;          violate_and_reboot(M_DMA_KEY, 3);
    idle_inputs(); pc = 16'hC0C0; dma_en = 1'b1; dma_addr = XS_MIN;         violate_and_reboot(M_DMA_XS, 3);
    idle_inputs(); pc = CR_MIN; tick(1'b0);
    pc = 16'hA500; dma_en = 1'b1; dma_addr = 16'h1000;                       violate_and_reboot(M_DMA_ATT, 3);
    // The stray SW-Att write above still reached RAM (reset only reboots the
    // core); attest again to show the system is usable after the reboots.
    ref_mem[16'h1000] = 16'hBAD0;
    attest(16'h1000, 64);
    for (int m = 0; m < M_COUNT; m++) begin
      checks++;
      if (n_mech[m] == 0) begin
        failures++;
        $display("mechanism %s never happened", mech_e'(m));
      end
    end
    for (int m = 0; m < M_COUNT; m++) $display("  %-16s %0d", mech_e'(m), n_mech[m]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
