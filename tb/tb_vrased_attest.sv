// tb_vrased_attest -- attestation workloads on the full-size system.
//
// The reported cost of one attestation of 4 KB with the exclusive-stack
// design is 3,601,216 CPU cycles (about 450 ms at 8 MHz), and the cost grows
// linearly with the attested size. This testbench acts as the core and
// replays two attestations of that shape:
//   1. AR = 0x1000-0x1FFF (4 KB) for exactly 3,601,216 cycles;
//   2. AR = all application RAM above the exclusive stack, 0x1000-0x41FF
//      (12,800 bytes), for 11,253,800 cycles: the 4 KB figure scaled
//      linearly, an estimate of this testbench, not a reported number.
// For each, the application writes the challenge into MR and fills AR; then
// PC enters SW-Att at CR_MIN and stays inside CR up to and including the
// cycle at CR_MAX. Inside, the accesses follow the attestation routine: copy
// the 64-byte key to the exclusive stack, read every word of AR, push and pop
// stack words (the HMAC's working state) in the remaining cycles, and write
// a 32-byte result into MR. Every read is checked against a reference copy,
// HW-Mod must stay silent throughout, and the cycle count from CR_MIN to
// CR_MAX is checked. The PC trace is synthetic: it has the routine's length
// and access pattern, not its instructions.
module tb_vrased_attest;
  import vrased_pkg::*;

  localparam int unsigned ATTEST_CYCLES = 3601216;
  localparam addr_t       AR_MIN        = 16'h1000;
  localparam int unsigned AR_WORDS      = 2048;
  // All application RAM above the exclusive stack, 0x1000-0x41FF; its cycle
  // count scales the 4 KB figure linearly (3,601,216 * 12,800 / 4,096).
  localparam addr_t       APP_MIN       = 16'h1000;
  localparam int unsigned APP_WORDS     = (32'(RAM_BASE) + RAM_BYTES - 32'(APP_MIN)) / 2;
  localparam int unsigned APP_CYCLES    = 11253800;

  logic       clk = 1'b0, rst_n = 1'b0;
  addr_t      pc = '0, d_addr = '0, dma_addr = '0;
  logic       irq = 1'b0, r_en = 1'b0, w_en = 1'b0, dma_en = 1'b0, dma_we = 1'b0;
  logic [1:0] d_be = 2'b11, dma_be = 2'b11;
  data_t      d_wdata = '0, dma_wdata = '0;
  data_t      instr, d_rdata, dma_rdata;
  logic       reset;
  logic [3:0] rst_vec;
  int         checks = 0, failures = 0;
  int         n_reset_cycles = 0, n_runs = 0;

  vrased_top dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (ATTEST_CYCLES + APP_CYCLES + 200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  data_t ar  [APP_WORDS];
  data_t xs  [(XS_MAX - XS_MIN + 1) / 2];
  int    pending_chk = 0;   // 1: check d_rdata against pending_exp after this edge
  data_t pending_exp;

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t: got %h exp %h", what, $time, got, exp);
    end
  endtask

  // One core cycle; counts any reset, checks the read issued last cycle.
  task automatic tick();
    #1;
    if (reset) n_reset_cycles++;
    @(posedge clk);
    #1;
    if (pending_chk != 0) begin
      checks++;
      if (d_rdata !== pending_exp) begin
        failures++;
        if (failures < 20) $display("FAIL read at %0t: got %h exp %h", $time, d_rdata, pending_exp);
      end
    end
    pending_chk = 0;
    r_en = 1'b0; w_en = 1'b0;
  endtask

  task automatic rd(addr_t a, data_t exp);
    r_en = 1'b1; d_addr = a; pending_chk = 1; pending_exp = exp;
  endtask
  task automatic wr(addr_t a, data_t d);
    w_en = 1'b1; d_addr = a; d_wdata = d;
  endtask

  // One attestation of n_words words at ar_min lasting n_cycles cycles from
  // the cycle at CR_MIN up to and including the cycle at CR_MAX.
  task automatic attest(string name, addr_t ar_min, int n_words, int unsigned n_cycles);
    automatic int unsigned cyc = 0;
    automatic int sp = 0;                    // stack depth in words below XS_MAX
    automatic int n_ar = 0, n_st = 0;
    // Application: challenge and attested data.
    for (int i = 0; i < MAC_SIZE / 2; i++) begin
      pc = 16'hC000; wr(addr_t'(MAC_ADDR + 2 * i), data_t'(16'h4300 + i)); tick();
    end
    for (int i = 0; i < n_words; i++) begin
      ar[i] = data_t'($urandom);
      pc = 16'hC002; wr(addr_t'(ar_min + 2 * i), ar[i]); tick();
    end
    // SW-Att.
    n_reset_cycles = 0;
    pc = CR_MIN; tick(); cyc++;
    for (int i = 0; i < 32; i++) begin          // key -> stack
      pc = addr_t'(CR_MIN + 2); rd(addr_t'(K_MIN + 2 * i), 16'h0000); pending_chk = 0; tick(); cyc++;
      pc = addr_t'(CR_MIN + 4); xs[sp] = data_t'(i); wr(addr_t'(XS_MAX - 1 - 2 * sp), xs[sp]); sp++; tick(); cyc++;
    end
    for (int i = 0; i < n_words; i++) begin     // read the attested region
      pc = addr_t'(CR_MIN + 16); rd(addr_t'(ar_min + 2 * i), ar[i]); tick(); cyc++;
      n_ar++;
    end
    // HMAC working state: push/pop on the exclusive stack until 16 MR
    // writes and the final instruction remain.
    while (cyc < n_cycles - (MAC_SIZE / 2) - 1) begin
      pc = addr_t'(CR_MIN + 32 + 2 * (cyc % 1024));
      if (sp > 0 && (cyc % 3 == 0 || sp >= 1100)) begin
        sp--;
        rd(addr_t'(XS_MAX - 1 - 2 * sp), xs[sp]);
      end else if (cyc % 3 == 1) begin
        xs[sp] = data_t'(cyc);
        wr(addr_t'(XS_MAX - 1 - 2 * sp), xs[sp]);
        sp++;
      end
      n_st++;
      tick(); cyc++;
    end
    for (int i = 0; i < MAC_SIZE / 2; i++) begin
      pc = addr_t'(CR_MAX - 2); wr(addr_t'(MAC_ADDR + 2 * i), data_t'(16'h3A00 + i)); tick(); cyc++;
    end
    pc = CR_MAX; tick(); cyc++;
    check("attestation cycles", cyc, n_cycles);
    check("resets during attestation", n_reset_cycles, 0);
    // Back in the application: the result is in MR.
    for (int i = 0; i < MAC_SIZE / 2; i++) begin
      pc = 16'hC100; rd(addr_t'(MAC_ADDR + 2 * i), data_t'(16'h3A00 + i)); tick();
    end
    check("resets after attestation", n_reset_cycles, 0);
    check("AR words read", n_ar, n_words);
    n_runs++;
    $display("%s: %0d bytes, %0d cycles (%0d.%02d ms at 8 MHz), %0d AR reads, %0d stack cycles",
             name, 2 * n_words, cyc, cyc / 8000, (cyc % 8000) / 80, n_ar, n_st);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    pc = RESET_PC;
    tick();
    attest("4 KB", AR_MIN, AR_WORDS, ATTEST_CYCLES);
    attest("application RAM", APP_MIN, APP_WORDS, APP_CYCLES);
    check("attestations run", n_runs, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
