// tb_vrased_hwmod -- self-checking test of HW-Mod, the four monitors and
// their OR.
//
// One reference model holds all nine rules of the standard design: key
// access control, atomicity/controlled invocation (the five-class walk over
// PC), exclusive stack and DMA protection, each with its own held-reset
// flag released by a violation-free cycle at PC = 0. Every cycle it predicts
// the four requests rst1..rst4 (rst_vec) and their OR (reset). The stimulus
// walks through legal SW-Att runs with application code, data accesses and
// DMA traffic in between, with occasional rule breaks. Each monitor must
// fire, alone and together with another, and the secure-reset rule (reset
// held until PC = 0) is checked on every release.
module tb_vrased_hwmod;
  import vrased_pkg::*;
  import tb_vrased_util_pkg::*;

  typedef enum int {R_RESET, R_OUT, R_FIRST, R_MID, R_LAST} cls_e;
  localparam addr_t MR_MAX = addr_t'(MAC_ADDR + MAC_SIZE - 1);

  logic  clk = 1'b0, rst_n = 1'b0;
  addr_t pc = '0, d_addr = '0, dma_addr = '0;
  logic  irq = 1'b0, r_en = 1'b0, w_en = 1'b0, dma_en = 1'b0;
  logic  reset;
  logic [3:0] rst_vec;
  int    checks = 0, failures = 0;
  int    n_fire [4] = '{0, 0, 0, 0};
  int    n_multi = 0, n_release = 0, n_runs = 0;

  vrased_hwmod dut (.clk, .rst_n, .pc, .irq, .r_en, .w_en, .d_addr, .dma_en, .dma_addr, .reset, .rst_vec);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit   held [4] = '{1'b1, 1'b1, 1'b1, 1'b1};   // monitors 1, 3, 4 (index 0, 2, 3)
  cls_e at_state = R_RESET;                     // monitor 2

  function automatic bit in_r(addr_t a, addr_t lo, addr_t hi);
    return a >= lo && a <= hi;
  endfunction

  function automatic cls_e classify(addr_t p);
    if (p == CR_MIN) return R_FIRST;
    if (p == CR_MAX) return R_LAST;
    if (p > CR_MIN && p < CR_MAX) return R_MID;
    return R_OUT;
  endfunction

  function automatic cls_e at_next(cls_e s, addr_t p, logic i);
    cls_e c = classify(p);
    if (s == R_RESET) return (p == 16'h0000) ? R_OUT : R_RESET;
    if (c == R_OUT) return (s == R_OUT || (s == R_LAST && !i)) ? R_OUT : R_RESET;
    if (i) return R_RESET;
    if ((s == R_OUT && c == R_FIRST) || (s == R_FIRST && (c == R_FIRST || c == R_MID)) ||
        (s == R_MID && (c == R_MID || c == R_LAST)) || (s == R_LAST && c == R_LAST)) return c;
    return R_RESET;
  endfunction

  task automatic cyc();
    bit   in_cr, v [4];
    logic [3:0] exp;
    cls_e an;
    #1;
    in_cr = in_r(pc, CR_MIN, CR_MAX);
    v[0] = !in_cr && r_en && in_r(d_addr, K_MIN, K_MAX);
    v[2] = (!in_cr && (r_en || w_en) && in_r(d_addr, XS_MIN, XS_MAX))
        || (in_cr && w_en && !in_r(d_addr, XS_MIN, XS_MAX) && !in_r(d_addr, MAC_ADDR, MR_MAX));
    v[3] = dma_en && (in_r(dma_addr, K_MIN, K_MAX) || in_r(dma_addr, XS_MIN, XS_MAX) || in_cr);
    an   = at_next(at_state, pc, irq);
    v[1] = 1'b0;
    for (int m = 0; m < 4; m++)
      exp[m] = (m == 1) ? (an == R_RESET) : (v[m] || (held[m] && pc != 16'h0000));
    checks += 2;
    if (rst_vec !== exp) begin
      failures++;
      $display("FAIL rst_vec at %0t: pc=%h irq=%b r=%b w=%b a=%h dma=%b/%h got %b exp %b",
               $time, pc, irq, r_en, w_en, d_addr, dma_en, dma_addr, rst_vec, exp);
    end
    if (reset !== (|exp)) begin
      failures++;
      $display("FAIL reset at %0t: got %b exp %b", $time, reset, |exp);
    end
    for (int m = 0; m < 4; m++) begin
      bit was = (m == 1) ? (at_state == R_RESET) : held[m];
      if (exp[m] && !was) n_fire[m]++;
    end
    if ($countones(exp & ~{held[3], held[2], at_state == R_RESET, held[0]}) > 1) n_multi++;
    if (at_state == R_LAST && an == R_OUT) n_runs++;
    if ((held[0] || held[2] || held[3] || at_state == R_RESET) && exp == 4'b0) begin
      n_release++;
      checks++;
      if (pc != 16'h0000) begin
        failures++;
        $display("FAIL reset released with pc=%h", pc);
      end
    end
    @(posedge clk);
    #1;
    for (int m = 0; m < 4; m++) if (m != 1) held[m] = exp[m];
    at_state = an;
  endtask

  // Drive one cycle of mostly well-behaved traffic, breaking a rule now and then.
  task automatic drive();
    bit    bad = chance(4);
    cls_e  s = at_state;
    addr_t mid = addr_t'(CR_MIN + 2 * $urandom_range(1, 32'(CR_MAX - CR_MIN) / 2 - 1));
    irq = 1'b0; r_en = 1'b0; w_en = 1'b0; dma_en = 1'b0;
    d_addr = addr_t'(16'h2000 + $urandom_range(4000)); dma_addr = addr_t'(16'h3000 + $urandom_range(2000));
    if (s == R_RESET || held[0] || held[2] || held[3]) pc = chance(40) ? 16'h0000 : 16'hC100;
    else begin
      unique case (s)
        R_OUT:   pc = chance(90) ? addr_t'(16'hC000 + 2 * $urandom_range(4000)) : CR_MIN;
        R_FIRST: pc = mid;
        R_MID:   pc = chance(95) ? mid : CR_MAX;
        R_LAST:  pc = 16'hC200;
        default: pc = 16'h0000;
      endcase
      if (classify(pc) == R_OUT) begin
        irq = logic'(chance(5)); r_en = logic'(chance(40)); w_en = logic'(!r_en && chance(40));
        dma_en = logic'(chance(30));
      end else begin
        r_en = logic'(chance(40)); w_en = logic'(!r_en && chance(40));
        if (r_en) d_addr = chance(50) ? edge_of(K_MIN, K_MAX) : edge_of(XS_MIN, XS_MAX);
        if (w_en) d_addr = chance(50) ? edge_of(MAC_ADDR, MR_MAX) : XS_MIN;
      end
    end
    if (bad) begin
      pc = pick_pc(); irq = logic'(chance(30)); r_en = logic'(chance(50)); w_en = logic'(chance(50));
      d_addr = pick_addr(); dma_en = logic'(chance(50)); dma_addr = pick_addr();
    end
    cyc();
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int n = 0; n < 60000; n++) drive();
    for (int m = 0; m < 4; m++)
      if (n_fire[m] == 0) begin
        failures++;
        $display("monitor rst%0d never fired", m + 1);
      end
    if (n_multi == 0 || n_release == 0 || n_runs == 0) begin
      failures++;
      $display("coverage hole: multi=%0d release=%0d runs=%0d", n_multi, n_release, n_runs);
    end
    $display("fired rst1 %0d rst2 %0d rst3 %0d rst4 %0d, together %0d, releases %0d, legal runs %0d",
             n_fire[0], n_fire[1], n_fire[2], n_fire[3], n_multi, n_release, n_runs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
