// tb_vrased_dma -- self-checking test of the DMA protection monitor.
//
// The default instance and a VRF_AUTH = 1 instance see the same stimulus.
// The reference predicts `reset` from the rules: with DMA_en set, a DMA
// address in KR or XS, or PC in CR, is a violation (with VRF_AUTH also a DMA
// address in CTR); reset then stays until a violation-free cycle with PC = 0.
// Directed cases first, then 20,000 random cycles; each rule must fire.
module tb_vrased_dma;
  import vrased_pkg::*;
  import tb_vrased_util_pkg::*;

  logic  clk = 1'b0, rst_n = 1'b0;
  addr_t pc = '0, dma_addr = '0;
  logic  dma_en = 1'b0;
  logic  reset0, reset1;
  int    checks = 0, failures = 0;
  int    n_key = 0, n_xs = 0, n_cr = 0, n_ctr = 0, n_release = 0;

  vrased_dma dut0 (.clk, .rst_n, .pc, .dma_en, .dma_addr, .reset(reset0));
  vrased_dma #(.VRF_AUTH(1'b1)) dut1 (.clk, .rst_n, .pc, .dma_en, .dma_addr, .reset(reset1));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit held0 = 1'b1, held1 = 1'b1;

  function automatic bit in_r(addr_t a, addr_t lo, addr_t hi);
    return a >= lo && a <= hi;
  endfunction

  task automatic check(string what, logic got, logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s at %0t: pc=%h en=%b a=%h got %b exp %b", what, $time, pc, dma_en, dma_addr, got, exp);
    end
  endtask

  task automatic cyc(addr_t p, logic en, addr_t a, int exp0 = -1, int exp1 = -1);
    bit k, x, c, t, v0, v1, e0, e1;
    pc = p; dma_en = en; dma_addr = a;
    #1;
    k = en && in_r(a, K_MIN, K_MAX);
    x = en && in_r(a, XS_MIN, XS_MAX);
    c = en && in_r(p, CR_MIN, CR_MAX);
    t = en && in_r(a, CTR_MIN, CTR_MAX);
    v0 = k || x || c;
    v1 = v0 || t;
    e0 = v0 || (held0 && p != 16'h0000);
    e1 = v1 || (held1 && p != 16'h0000);
    if (exp0 >= 0) check("directed0", reset0, exp0[0]);
    if (exp1 >= 0) check("directed1", reset1, exp1[0]);
    check("dut0", reset0, e0);
    check("dut1", reset1, e1);
    n_key += int'(k); n_xs += int'(x); n_cr += int'(c); n_ctr += int'(t && !v0);
    if (held0 && !e0) n_release++;
    @(posedge clk);
    #1;
    held0 = e0; held1 = e1;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    cyc(16'hC000, 0, 16'h0000, 1, 1);
    cyc(16'h0000, 0, 16'h0000, 0, 0);
    // DMA to application RAM while the application runs: fine.
    cyc(16'hC000, 1, 16'h2000, 0, 0);
    cyc(16'hC002, 1, addr_t'(XS_MIN - 1), 0, 0);
    cyc(16'hC004, 1, addr_t'(K_MAX + 1), 0, 0);
    // DMA address in KR but DMA off: fine.
    cyc(16'hC006, 0, K_MIN, 0, 0);
    // DMA reads the key.
    cyc(16'hC008, 1, K_MAX, 1, 1);
    cyc(16'h0000, 0, 16'h0000, 0, 0);
    // DMA reads the exclusive stack.
    cyc(16'hC008, 1, XS_MIN, 1, 1);
    cyc(16'hC00A, 0, 16'h0000, 1, 1);
    cyc(16'h0000, 0, 16'h0000, 0, 0);
    // Any DMA while SW-Att runs.
    cyc(CR_MAX, 1, 16'h2000, 1, 1);
    cyc(16'h0000, 0, 16'h0000, 0, 0);
    // DMA on the counter: only with VRF_AUTH.
    cyc(16'hC00C, 1, CTR_MIN, 0, 1);
    cyc(16'h0000, 0, 16'h0000, 0, 0);
    for (int i = 0; i < 20000; i++)
      cyc(pick_pc(), logic'(chance(50)), pick_addr());
    if (n_key == 0 || n_xs == 0 || n_cr == 0 || n_ctr == 0 || n_release == 0) begin
      failures++;
      $display("coverage hole");
    end
    $display("DMA on key %0d, on XS %0d, during SW-Att %0d, on CTR %0d, releases %0d", n_key, n_xs, n_cr, n_ctr, n_release);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
