// tb_vrased_atomicity -- self-checking test of the atomicity and
// controlled-invocation monitor.
//
// The reference model classifies PC as outside CR, first, middle or last
// instruction of SW-Att and keeps the class of the previous cycle. A move is
// allowed only along out->first->middle->last->out (staying in a class is
// allowed, irq is allowed only while PC stays outside CR); anything else,
// or irq with PC in CR, is a violation, and reset is then held until PC = 0.
// Stimulus is a random walk that mostly follows legal SW-Att runs and
// sometimes jumps or raises irq. Directed cases come first. Every kind of
// violation and complete legal runs must each occur.
module tb_vrased_atomicity;
  import vrased_pkg::*;
  import tb_vrased_util_pkg::*;

  typedef enum int {R_RESET, R_OUT, R_FIRST, R_MID, R_LAST} cls_e;

  logic  clk = 1'b0, rst_n = 1'b0;
  addr_t pc = '0;
  logic  irq = 1'b0;
  logic  reset;
  int    checks = 0, failures = 0;
  int    n_runs = 0, n_bad_entry = 0, n_bad_exit = 0, n_irq = 0, n_release = 0, n_other = 0;

  vrased_atomicity dut (.clk, .rst_n, .pc, .irq, .reset);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  cls_e ref_state = R_RESET;

  function automatic cls_e classify(addr_t p);
    if (p == CR_MIN) return R_FIRST;
    if (p == CR_MAX) return R_LAST;
    if (p > CR_MIN && p < CR_MAX) return R_MID;
    return R_OUT;
  endfunction

  function automatic cls_e ref_next(cls_e s, addr_t p, logic i);
    cls_e c = classify(p);
    if (s == R_RESET) return (p == 16'h0000) ? R_OUT : R_RESET;
    if (c == R_OUT) return (s == R_OUT || (s == R_LAST && !i)) ? R_OUT : R_RESET;
    if (i) return R_RESET;
    case ({s, c})
      {R_OUT, R_FIRST}, {R_FIRST, R_FIRST}, {R_FIRST, R_MID},
      {R_MID, R_MID}, {R_MID, R_LAST}, {R_LAST, R_LAST}: return c;
      default: return R_RESET;
    endcase
  endfunction

  task automatic check(string what, logic got, logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s at %0t: state=%s pc=%h irq=%b got %b exp %b", what, $time, ref_state.name(), pc, irq, got, exp);
    end
  endtask

  task automatic cyc(addr_t p, logic i, int exp = -1);
    cls_e nxt, c;
    pc = p; irq = i;
    #1;
    nxt = ref_next(ref_state, p, i);
    c   = classify(p);
    if (exp >= 0) check("directed", reset, exp[0]);
    check("model", reset, nxt == R_RESET);
    if (ref_state != R_RESET) begin
      if (ref_state == R_LAST && nxt == R_OUT) n_runs++;
      if (nxt == R_RESET) begin
        if (i && c != R_OUT) n_irq++;
        else if (ref_state == R_OUT && (c == R_MID || c == R_LAST)) n_bad_entry++;
        else if ((ref_state == R_FIRST || ref_state == R_MID) && c == R_OUT) n_bad_exit++;
        else n_other++;
      end
    end else if (nxt != R_RESET) n_release++;
    @(posedge clk);
    #1;
    ref_state = nxt;
  endtask

  function automatic addr_t app_pc();
    return (chance(50)) ? addr_t'(16'hC000 + 2 * $urandom_range(8000)) : addr_t'(CR_MIN - 2 * $urandom_range(1, 100));
  endfunction
  function automatic addr_t mid_pc();
    return addr_t'(CR_MIN + 2 * $urandom_range(1, 32'(CR_MAX - CR_MIN) / 2 - 1));
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    // Power-up: held until PC = 0.
    cyc(16'hC000, 0, 1);
    cyc(16'h0000, 0, 0);
    // A complete legal run, with an interrupt outside CR.
    cyc(16'hC000, 1, 0);
    cyc(CR_MIN, 0, 0);
    cyc(CR_MIN, 0, 0);
    cyc(16'hA100, 0, 0);
    cyc(16'hA100, 0, 0);
    cyc(CR_MAX, 0, 0);
    cyc(16'hC010, 0, 0);
    // Jump into the middle of SW-Att.
    cyc(16'hA100, 0, 1);
    cyc(16'hC000, 0, 1);
    cyc(16'h0000, 0, 0);
    // Leave from the middle.
    cyc(CR_MIN, 0, 0);
    cyc(16'hA200, 0, 0);
    cyc(16'hC000, 0, 1);
    cyc(16'h0000, 0, 0);
    // Interrupt during SW-Att.
    cyc(CR_MIN, 0, 0);
    cyc(16'hA200, 1, 1);
    cyc(16'h0000, 0, 0);
    // Interrupt on the first instruction.
    cyc(CR_MIN, 1, 1);
    cyc(16'h0000, 0, 0);
    // First straight to last is not a legal path.
    cyc(CR_MIN, 0, 0);
    cyc(CR_MAX, 0, 1);
    cyc(16'h0000, 0, 0);
    // Random walk.
    for (int n = 0; n < 60000; n++) begin
      addr_t p;
      automatic logic i = logic'(chance(2));
      unique case (ref_state)
        R_RESET: p = chance(40) ? 16'h0000 : app_pc();
        R_OUT:   p = chance(85) ? app_pc() : (chance(80) ? CR_MIN : pick_pc());
        R_FIRST: p = chance(25) ? CR_MIN : (chance(95) ? mid_pc() : pick_pc());
        R_MID:   p = chance(90) ? mid_pc() : (chance(85) ? CR_MAX : pick_pc());
        R_LAST:  p = chance(30) ? CR_MAX : (chance(90) ? app_pc() : pick_pc());
        default: p = pick_pc();
      endcase
      cyc(p, i);
    end
    if (n_runs == 0 || n_bad_entry == 0 || n_bad_exit == 0 || n_irq == 0 || n_release == 0) begin
      failures++;
      $display("coverage hole");
    end
    $display("legal runs %0d, bad entries %0d, bad exits %0d, irq in CR %0d, other %0d, releases %0d",
             n_runs, n_bad_entry, n_bad_exit, n_irq, n_other, n_release);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
