// tb_vrased_key_ac -- self-checking test of the key access-control monitor.
//
// Two instances run side by side on the same stimulus: the default one and
// one with the verifier-authentication rule (VRF_AUTH = 1). A reference
// model, written from the rules themselves, predicts `reset` every cycle:
// violation = !(PC in CR) && R_en && D_addr in KR  (plus, with VRF_AUTH,
// !(PC in CR) && W_en && D_addr in CTR); once raised, reset stays high until
// a violation-free cycle with PC = 0. Directed cases come first (each with a
// hand-worked expectation), then 20,000 random cycles.
module tb_vrased_key_ac;
  import vrased_pkg::*;
  import tb_vrased_util_pkg::*;

  logic  clk = 1'b0, rst_n = 1'b0;
  addr_t pc = '0, d_addr = '0;
  logic  r_en = 1'b0, w_en = 1'b0;
  logic  reset0, reset1;
  int    checks = 0, failures = 0;
  int    n_viol_key = 0, n_viol_ctr = 0, n_release = 0;

  vrased_key_ac dut0 (.clk, .rst_n, .pc, .r_en, .w_en, .d_addr, .reset(reset0));
  vrased_key_ac #(.VRF_AUTH(1'b1)) dut1 (.clk, .rst_n, .pc, .r_en, .w_en, .d_addr, .reset(reset1));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit held0 = 1'b1, held1 = 1'b1;   // reference: monitor is in its Reset state

  function automatic bit in_r(addr_t a, addr_t lo, addr_t hi);
    return a >= lo && a <= hi;
  endfunction

  task automatic check(string what, logic got, logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s at %0t: pc=%h r=%b w=%b a=%h got %b exp %b", what, $time, pc, r_en, w_en, d_addr, got, exp);
    end
  endtask

  // Apply one cycle of inputs, check both outputs, advance the reference.
  task automatic cyc(addr_t p, logic r, logic w, addr_t a, int exp0 = -1);
    bit outside, v0, v1, e0, e1;
    pc = p; r_en = r; w_en = w; d_addr = a;
    #1;
    outside = !in_r(p, CR_MIN, CR_MAX);
    v0 = outside && r && in_r(a, K_MIN, K_MAX);
    v1 = v0 || (outside && w && in_r(a, CTR_MIN, CTR_MAX));
    e0 = v0 || (held0 && p != 16'h0000);
    e1 = v1 || (held1 && p != 16'h0000);
    if (exp0 >= 0) check("directed", reset0, exp0[0]);
    check("dut0", reset0, e0);
    check("dut1", reset1, e1);
    if (v0) n_viol_key++;
    if (v1 && !v0) n_viol_ctr++;
    if (held0 && !e0) n_release++;
    @(posedge clk);
    #1;
    held0 = e0; held1 = e1;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    // Power-up: held in reset until PC = 0.
    cyc(16'hC000, 0, 0, 16'h0000, 1);
    cyc(16'h0000, 0, 0, 16'h0000, 0);
    // SW-Att may read the key.
    cyc(CR_MIN, 1, 0, K_MIN, 0);
    cyc(CR_MAX, 1, 0, K_MAX, 0);
    // Application reads just outside KR: fine.
    cyc(16'hC010, 1, 0, addr_t'(K_MIN - 1), 0);
    cyc(16'hC012, 1, 0, addr_t'(K_MAX + 1), 0);
    // Application writes KR (ROM, no read): not this monitor's rule.
    cyc(16'hC014, 0, 1, K_MIN, 0);
    // Application reads the key: reset now, held until PC = 0.
    cyc(16'hC016, 1, 0, 16'hA020, 1);
    cyc(16'hC018, 0, 0, 16'h0000, 1);
    cyc(CR_MIN,   0, 0, 16'h0000, 1);
    cyc(16'h0000, 0, 0, 16'h0000, 0);
    cyc(16'hC000, 0, 0, 16'h0000, 0);
    // PC one below / above CR reading the key.
    cyc(addr_t'(CR_MIN - 2), 1, 0, K_MIN, 1);
    cyc(16'h0000, 0, 0, 16'h0000, 0);
    cyc(addr_t'(CR_MAX + 2), 1, 0, K_MAX, 1);
    cyc(16'h0000, 1, 0, K_MAX, 1);      // PC = 0 but still violating: stays
    cyc(16'h0000, 0, 0, 16'h0000, 0);
    // Counter write by the application: only the VRF_AUTH instance resets.
    cyc(16'hC020, 0, 1, CTR_MIN, 0);
    check("dut1 ctr", reset1, 1'b1);
    cyc(16'h0000, 0, 0, 16'h0000, 0);
    // Random traffic.
    for (int i = 0; i < 20000; i++)
      cyc(pick_pc(), logic'(chance(50)), logic'(chance(30)), pick_addr());
    if (n_viol_key == 0 || n_viol_ctr == 0 || n_release == 0) begin
      failures++;
      $display("coverage hole: key=%0d ctr=%0d release=%0d", n_viol_key, n_viol_ctr, n_release);
    end
    $display("key reads caught %0d, counter writes caught %0d, releases %0d", n_viol_key, n_viol_ctr, n_release);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
