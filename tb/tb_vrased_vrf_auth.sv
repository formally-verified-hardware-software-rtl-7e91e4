// tb_vrased_vrf_auth -- end-to-end test of the verifier-authentication
// variant (VRF_AUTH = 1) of the VRASED system.
//
// In this variant SW-Att keeps the last accepted challenge in the counter
// region CTR in flash, and only SW-Att may change it. The testbench plays the
// core and the DMA controller around vrased_top #(.VRF_AUTH(1)) and checks:
//   - SW-Att (PC in CR) may write CTR, and its value reads back afterwards;
//   - the application may read CTR, and may write flash next to CTR;
//   - an application write to CTR resets through the key monitor (bit 0);
//   - a DMA read or write of CTR resets through the DMA monitor (bit 3);
//   - a SW-Att write to flash outside CTR still resets through the
//     exclusive-stack monitor (bit 2);
//   - every reset is held until PC = 0.
// HW-Mod reboots the core but does not block the offending access, so after
// each attack on CTR a legal SW-Att run rewrites the counter before it is
// read back.
// Every mechanism is counted and must occur at least once. The rules follow
// the design's optional variant; addresses are this implementation's map.
module tb_vrased_vrf_auth;
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

  vrased_top #(.VRF_AUTH(1'b1)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef enum int {
    M_CTR_UPDATE, M_CTR_READ, M_FLASH_NEAR, M_APP_CTR_WRITE, M_DMA_CTR_WRITE,
    M_DMA_CTR_READ, M_ATT_FLASH_WRITE, M_RELEASE, M_COUNT
  } mech_e;
  localparam int unsigned CTR_WORDS = (32'(CTR_MAX) - 32'(CTR_MIN) + 1) / 2;
  int    n_mech [M_COUNT];
  data_t ctr_ref [CTR_WORDS];

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t: got %h exp %h", what, $time, got, exp);
    end
  endtask

  task automatic idle_inputs();
    irq = 1'b0; r_en = 1'b0; w_en = 1'b0; dma_en = 1'b0; dma_we = 1'b0;
  endtask

  task automatic tick(logic exp_reset);
    #1;
    check("reset", reset, exp_reset);
    @(posedge clk);
    #1;
  endtask

  task automatic cpu_write(addr_t p, addr_t a, data_t d);
    idle_inputs(); pc = p; w_en = 1'b1; d_addr = a; d_wdata = d;
    tick(1'b0);
  endtask

  task automatic cpu_read(addr_t p, addr_t a, data_t exp);
    idle_inputs(); pc = p; r_en = 1'b1; d_addr = a;
    tick(1'b0);
    check($sformatf("read %h", a), d_rdata, exp);
  endtask

  task automatic violate_and_reboot(mech_e m, int monitor);
    #1;
    check("violation reset", reset, 1'b1);
    check("violation monitor", rst_vec[monitor], 1'b1);
    @(posedge clk);
    #1;
    idle_inputs();
    n_mech[m]++;
    for (int i = 0; i < 2; i++) begin
      pc = addr_t'(16'hC100 + 2 * i);
      tick(1'b1);
    end
    pc = RESET_PC;
    tick(1'b0);
    n_mech[M_RELEASE]++;
  endtask

  // SW-Att run that stores a new counter value into CTR.
  task automatic update_ctr(data_t base);
    idle_inputs(); pc = CR_MIN;
    tick(1'b0);
    for (int i = 0; i < int'(CTR_WORDS); i++) begin
      ctr_ref[i] = data_t'(base + i);
      cpu_write(addr_t'(CR_MIN + 2 + 2 * i), addr_t'(CTR_MIN + 2 * i), ctr_ref[i]);
      n_mech[M_CTR_UPDATE]++;
    end
    idle_inputs(); pc = CR_MAX;
    tick(1'b0);
    pc = 16'hC200;
    tick(1'b0);
  endtask

  task automatic read_ctr();
    for (int i = 0; i < int'(CTR_WORDS); i++) begin
      cpu_read(16'hC300, addr_t'(CTR_MIN + 2 * i), ctr_ref[i]);
      n_mech[M_CTR_READ]++;
    end
  endtask

  initial begin
    foreach (n_mech[i]) n_mech[i] = 0;
    idle_inputs();
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    pc = RESET_PC;
    tick(1'b0);
    // Legal: SW-Att writes the counter, the application reads it and writes
    // the flash words just outside CTR.
    update_ctr(data_t'($urandom));
    read_ctr();
    cpu_write(16'hC010, addr_t'(CTR_MIN - 2), 16'h1234);
    cpu_write(16'hC012, addr_t'(CTR_MAX + 1), 16'h5678);
    cpu_read(16'hC014, addr_t'(CTR_MIN - 2), 16'h1234);
    cpu_read(16'hC016, addr_t'(CTR_MAX + 1), 16'h5678);
    n_mech[M_FLASH_NEAR]++;
    for (int k = 0; k < 8; k++) begin
      automatic addr_t a = addr_t'(CTR_MIN + 2 * ($urandom_range(CTR_WORDS - 1)));
      automatic data_t v = data_t'($urandom);
      // Application write to CTR.
      idle_inputs(); pc = 16'hC020; w_en = 1'b1; d_addr = a; d_wdata = v;
      violate_and_reboot(M_APP_CTR_WRITE, 0);
      // The access itself reached flash; SW-Att restores the counter.
      update_ctr(data_t'($urandom));
      read_ctr();
      // DMA write and read of CTR.
      idle_inputs(); pc = 16'hC030; dma_en = 1'b1; dma_we = 1'b1; dma_addr = a; dma_wdata = v;
      violate_and_reboot(M_DMA_CTR_WRITE, 3);
      update_ctr(data_t'($urandom));
      idle_inputs(); pc = 16'hC040; dma_en = 1'b1; dma_addr = a;
      violate_and_reboot(M_DMA_CTR_READ, 3);
      // SW-Att writing flash outside CTR.
      idle_inputs(); pc = CR_MIN; tick(1'b0);
      pc = 16'hA100; w_en = 1'b1; d_addr = addr_t'(CTR_MIN - 2); d_wdata = v;
      violate_and_reboot(M_ATT_FLASH_WRITE, 2);
      read_ctr();
    end
    for (int m = 0; m < M_COUNT; m++) begin
      checks++;
      if (n_mech[m] == 0) begin
        failures++;
        $display("mechanism %s never happened", mech_e'(m));
      end
    end
    for (int m = 0; m < M_COUNT; m++) $display("  %-18s %0d", mech_e'(m), n_mech[m]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
