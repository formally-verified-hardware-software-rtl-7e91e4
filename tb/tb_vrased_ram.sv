// tb_vrased_ram -- self-checking test of the read/write memory.
//
// Drives all three ports at random at the default size (16 KB), on a small
// window of words so that ports collide, plus a few words at the top of the
// array. A reference array predicts every read: data one cycle after the
// request, taken before the same edge's writes; byte enables write single
// bytes; when two ports write one byte together the lower port wins.
module tb_vrased_ram;
  import vrased_pkg::*;

  localparam int unsigned WORDS = RAM_BYTES / 2;

  logic     clk = 1'b0;
  mem_req_t req   [N_PORTS];
  data_t    rdata [N_PORTS];
  int       checks = 0, failures = 0;
  int       n_collide = 0, n_bytewr = 0;

  vrased_ram dut (.clk, .req, .rdata);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  data_t ref_mem [int];

  function automatic addr_t pick_word();
    return chance(90) ? addr_t'($urandom_range(31)) : addr_t'(WORDS - 1 - $urandom_range(3));
  endfunction
  function automatic bit chance(int unsigned pct);
    return $urandom_range(99) < pct;
  endfunction

  task automatic idle();
    for (int p = 0; p < N_PORTS; p++) req[p] = '0;
  endtask

  initial begin
    data_t exp [N_PORTS];
    bit    chk [N_PORTS];
    idle();
    // Fill the window and the top words through the CPU port.
    for (int w = 0; w < 32 + 4; w++) begin
      automatic addr_t a = (w < 32) ? addr_t'(w) : addr_t'(WORDS - 1 - (w - 32));
      @(negedge clk);
      req[PORT_CPU] = '{en: 1'b1, we: 1'b1, be: 2'b11, addr: a, wdata: data_t'($urandom)};
      ref_mem[int'(a)] = req[PORT_CPU].wdata;
    end
    @(negedge clk); idle();
    for (int n = 0; n < 20000; n++) begin
      @(negedge clk);
      for (int p = 0; p < N_PORTS; p++) begin
        req[p].en    = chance(70);
        req[p].we    = chance(40);
        req[p].be    = chance(70) ? 2'b11 : (chance(50) ? 2'b01 : 2'b10);
        req[p].addr  = pick_word();
        req[p].wdata = data_t'($urandom);
      end
      // Expected read data: memory before this edge's writes.
      for (int p = 0; p < N_PORTS; p++) begin
        chk[p] = req[p].en;
        if (chk[p]) exp[p] = ref_mem[int'(req[p].addr)];
      end
      // Writes, highest port first so the lowest lands last.
      for (int p = N_PORTS - 1; p >= 0; p--)
        if (req[p].en && req[p].we) begin
          automatic data_t d = ref_mem[int'(req[p].addr)];
          if (req[p].be[0]) d[7:0]  = req[p].wdata[7:0];
          if (req[p].be[1]) d[15:8] = req[p].wdata[15:8];
          ref_mem[int'(req[p].addr)] = d;
          if (req[p].be != 2'b11) n_bytewr++;
          for (int q = 0; q < p; q++)
            if (req[q].en && req[q].we && req[q].addr == req[p].addr) n_collide++;
        end
      @(posedge clk);
      #1;
      for (int p = 0; p < N_PORTS; p++)
        if (chk[p]) begin
          checks++;
          if (rdata[p] !== exp[p]) begin
            failures++;
            if (failures < 10) $display("FAIL port %0d addr %h: got %h exp %h", p, req[p].addr, rdata[p], exp[p]);
          end
        end
    end
    if (n_collide == 0 || n_bytewr == 0) begin
      failures++;
      $display("coverage hole");
    end
    $display("write collisions %0d, byte writes %0d", n_collide, n_bytewr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
