// tb_vrased_mem_backbone -- self-checking test of the memory backbone.
//
// The memories are replaced by the testbench itself: every cycle it drives
// fresh random words on all nine memory read-data inputs. A reference
// decoder (RAM 0x0200-0x41FF, ROM 0xA000-0xBFFF, flash 0xC000-0xFFFF,
// anything else unmapped) predicts, for random fetch, CPU and DMA accesses
// drawn mostly at the region edges, which memory port each request must
// appear on, with which word index and write enable (never a write to ROM),
// and which memory's word each master must get back one cycle later (zero
// when unmapped or after a write).
module tb_vrased_mem_backbone;
  import vrased_pkg::*;

  logic       clk = 1'b0, rst_n = 1'b0;
  addr_t      pc = '0, d_addr = '0, dma_addr = '0;
  logic       r_en = 1'b0, w_en = 1'b0, dma_en = 1'b0, dma_we = 1'b0;
  logic [1:0] d_be = '0, dma_be = '0;
  data_t      d_wdata = '0, dma_wdata = '0;
  data_t      instr, d_rdata, dma_rdata;
  mem_req_t   rom_req [N_PORTS], ram_req [N_PORTS], flash_req [N_PORTS];
  data_t      rom_rdata [N_PORTS], ram_rdata [N_PORTS], flash_rdata [N_PORTS];
  int         checks = 0, failures = 0;
  int         n_reg [4] = '{0, 0, 0, 0};
  int         n_rom_wr = 0;

  vrased_mem_backbone dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // 0 none, 1 ROM, 2 RAM, 3 flash
  function automatic int region(addr_t a);
    if (a >= 16'hA000 && a <= 16'hBFFF) return 1;
    if (a >= 16'h0200 && a <= 16'h41FF) return 2;
    if (a >= 16'hC000) return 3;
    return 0;
  endfunction
  function automatic addr_t base(int r);
    case (r)
      1: return 16'hA000;
      2: return 16'h0200;
      3: return 16'hC000;
      default: return 16'h0000;
    endcase
  endfunction
  function automatic addr_t pick();
    addr_t edges [10] = '{16'h01FF, 16'h0200, 16'h41FF, 16'h4200, 16'h9FFF,
                          16'hA000, 16'hBFFF, 16'hC000, 16'hFFFE, 16'hFFFF};
    return ($urandom_range(99) < 40) ? edges[$urandom_range(9)] : addr_t'($urandom);
  endfunction

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t: got %h exp %h", what, $time, got, exp);
    end
  endtask

  task automatic check_port(int p, logic en, logic we, logic [1:0] be, addr_t a, data_t wd);
    int r = region(a);
    addr_t w = addr_t'((a - base(r)) >> 1);
    check($sformatf("rom en p%0d", p),   rom_req[p].en,   en && r == 1);
    check($sformatf("ram en p%0d", p),   ram_req[p].en,   en && r == 2);
    check($sformatf("flash en p%0d", p), flash_req[p].en, en && r == 3);
    check($sformatf("rom we p%0d", p),   rom_req[p].we,   1'b0);
    if (r == 1 && en) begin check("rom addr", rom_req[p].addr, w); if (we) n_rom_wr++; end
    if (r == 2 && en) check("ram req", {ram_req[p].we, ram_req[p].be, ram_req[p].addr, ram_req[p].wdata}, {we, be, w, wd});
    if (r == 3 && en) check("flash req", {flash_req[p].we, flash_req[p].be, flash_req[p].addr, flash_req[p].wdata}, {we, be, w, wd});
    if (en) n_reg[r]++;
  endtask

  function automatic data_t pick_data(int r, int p);
    case (r)
      1: return rom_rdata[p];
      2: return ram_rdata[p];
      3: return flash_rdata[p];
      default: return '0;
    endcase
  endfunction

  initial begin
    int rsel [N_PORTS];
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 20000; n++) begin
      @(negedge clk);
      pc = pick();
      r_en = ($urandom_range(99) < 50); w_en = !r_en && ($urandom_range(99) < 50);
      d_addr = pick(); d_be = 2'($urandom); d_wdata = data_t'($urandom);
      dma_en = ($urandom_range(99) < 50); dma_we = ($urandom_range(99) < 50);
      dma_addr = pick(); dma_be = 2'($urandom); dma_wdata = data_t'($urandom);
      for (int p = 0; p < N_PORTS; p++) begin
        rom_rdata[p] = data_t'($urandom); ram_rdata[p] = data_t'($urandom); flash_rdata[p] = data_t'($urandom);
      end
      #1;
      check_port(PORT_FETCH, 1'b1, 1'b0, 2'b11, pc, '0);
      check_port(PORT_CPU, r_en || w_en, w_en, d_be, d_addr, d_wdata);
      check_port(PORT_DMA, dma_en, dma_we, dma_be, dma_addr, dma_wdata);
      rsel[PORT_FETCH] = region(pc);
      rsel[PORT_CPU]   = (r_en && !w_en) ? region(d_addr) : 0;
      rsel[PORT_DMA]   = (dma_en && !dma_we) ? region(dma_addr) : 0;
      @(posedge clk);
      #1;
      check("instr",     instr,     pick_data(rsel[PORT_FETCH], PORT_FETCH));
      check("d_rdata",   d_rdata,   pick_data(rsel[PORT_CPU], PORT_CPU));
      check("dma_rdata", dma_rdata, pick_data(rsel[PORT_DMA], PORT_DMA));
    end
    if (n_reg[0] == 0 || n_reg[1] == 0 || n_reg[2] == 0 || n_reg[3] == 0 || n_rom_wr == 0) begin
      failures++;
      $display("coverage hole");
    end
    $display("accesses: unmapped %0d ROM %0d RAM %0d flash %0d, ROM writes dropped %0d",
             n_reg[0], n_reg[1], n_reg[2], n_reg[3], n_rom_wr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
