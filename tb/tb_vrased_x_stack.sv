// tb_vrased_x_stack -- self-checking test of the exclusive-stack monitor.
//
// The default instance and a VRF_AUTH = 1 instance see the same stimulus. The
// reference model predicts `reset` from the two rules: code outside CR may
// not read or write XS; code inside CR may write only XS and MR (and CTR
// with VRF_AUTH). A raised reset stays until a violation-free cycle with
// PC = 0. Directed cases with hand-worked expectations come first, then
// 20,000 random cycles; every rule must fire at least once.
module tb_vrased_x_stack;
  import vrased_pkg::*;
  import tb_vrased_util_pkg::*;

  localparam addr_t MR_MAX = addr_t'(MAC_ADDR + MAC_SIZE - 1);

  logic  clk = 1'b0, rst_n = 1'b0;
  addr_t pc = '0, d_addr = '0;
  logic  r_en = 1'b0, w_en = 1'b0;
  logic  reset0, reset1;
  int    checks = 0, failures = 0;
  int    n_app_xs = 0, n_att_wr = 0, n_ctr_ok = 0, n_release = 0;

  vrased_x_stack dut0 (.clk, .rst_n, .pc, .r_en, .w_en, .d_addr, .reset(reset0));
  vrased_x_stack #(.VRF_AUTH(1'b1)) dut1 (.clk, .rst_n, .pc, .r_en, .w_en, .d_addr, .reset(reset1));

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
      $display("FAIL %s at %0t: pc=%h r=%b w=%b a=%h got %b exp %b", what, $time, pc, r_en, w_en, d_addr, got, exp);
    end
  endtask

  task automatic cyc(addr_t p, logic r, logic w, addr_t a, int exp0 = -1, int exp1 = -1);
    bit in_cr, xs, mr, ctr, app, att0, att1, v0, v1, e0, e1;
    pc = p; r_en = r; w_en = w; d_addr = a;
    #1;
    in_cr = in_r(p, CR_MIN, CR_MAX);
    xs    = in_r(a, XS_MIN, XS_MAX);
    mr    = in_r(a, MAC_ADDR, MR_MAX);
    ctr   = in_r(a, CTR_MIN, CTR_MAX);
    app   = !in_cr && (r || w) && xs;
    att0  = in_cr && w && !xs && !mr;
    att1  = att0 && !ctr;
    v0 = app || att0;
    v1 = app || att1;
    e0 = v0 || (held0 && p != 16'h0000);
    e1 = v1 || (held1 && p != 16'h0000);
    if (exp0 >= 0) check("directed0", reset0, exp0[0]);
    if (exp1 >= 0) check("directed1", reset1, exp1[0]);
    check("dut0", reset0, e0);
    check("dut1", reset1, e1);
    if (app) n_app_xs++;
    if (att0) n_att_wr++;
    if (att0 && !att1) n_ctr_ok++;
    if (held0 && !e0) n_release++;
    @(posedge clk);
    #1;
    held0 = e0; held1 = e1;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    cyc(16'hC000, 0, 0, 16'h0000, 1, 1);
    cyc(16'h0000, 0, 0, 16'h0000, 0, 0);
    // SW-Att uses its stack and writes the MAC buffer.
    cyc(CR_MIN, 1, 0, XS_MIN, 0, 0);
    cyc(16'hA100, 0, 1, XS_MAX, 0, 0);
    cyc(16'hA102, 0, 1, MAC_ADDR, 0, 0);
    cyc(16'hA104, 0, 1, MR_MAX, 0, 0);
    cyc(16'hA106, 1, 0, 16'hC000, 0, 0);   // SW-Att reads anything
    // Application next to XS: fine.
    cyc(16'hC000, 1, 1, addr_t'(XS_MIN - 1), 0, 0);
    cyc(16'hC002, 1, 1, addr_t'(XS_MAX + 1), 0, 0);
    // Application reads XS.
    cyc(16'hC004, 1, 0, 16'h0800, 1, 1);
    cyc(16'hC006, 0, 0, 16'h0000, 1, 1);
    cyc(16'h0000, 0, 0, 16'h0000, 0, 0);
    // Application writes XS.
    cyc(16'hC004, 0, 1, XS_MAX, 1, 1);
    cyc(16'h0000, 0, 0, 16'h0000, 0, 0);
    // SW-Att writes one past MR.
    cyc(CR_MAX, 0, 1, addr_t'(MR_MAX + 1), 1, 1);
    cyc(16'h0000, 0, 0, 16'h0000, 0, 0);
    // SW-Att writes the counter: allowed only with VRF_AUTH.
    cyc(16'hA200, 0, 1, CTR_MAX, 1, 0);
    cyc(16'h0000, 0, 0, 16'h0000, 0, 0);
    for (int i = 0; i < 20000; i++)
      cyc(pick_pc(), logic'(chance(40)), logic'(chance(40)), pick_addr());
    if (n_app_xs == 0 || n_att_wr == 0 || n_ctr_ok == 0 || n_release == 0) begin
      failures++;
      $display("coverage hole");
    end
    $display("app XS accesses %0d, SW-Att stray writes %0d (CTR %0d), releases %0d", n_app_xs, n_att_wr, n_ctr_ok, n_release);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
