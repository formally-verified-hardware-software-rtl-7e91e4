// tb_vrased_rom -- self-checking test of the ROM.
//
// One instance is loaded from tb_vrased_rom.hex (256 words, word i holds
// (i * 0x9E37) ^ (i << 3) ^ 0x5A5A, low 16 bits), the other, at the default
// size, has no image and must read as zero. Random reads on all three ports
// check the one-cycle latency and that a port with en low keeps its last
// output (it is checked only once the port has read).
module tb_vrased_rom;
  import vrased_pkg::*;

  logic     clk = 1'b0;
  mem_req_t req   [N_PORTS];
  data_t    rdata [N_PORTS], rdata_z [N_PORTS];
  int       checks = 0, failures = 0;

  vrased_rom #(.BYTES(512), .INIT_FILE("tb/tb_vrased_rom.hex")) dut (.clk, .req, .rdata);
  vrased_rom dut_z (.clk, .req, .rdata(rdata_z));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic data_t image(int i);
    return data_t'((i * 32'h9E37) ^ (i << 3) ^ 32'h5A5A);
  endfunction

  task automatic check(string what, data_t got, data_t exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %h exp %h", what, got, exp);
    end
  endtask

  initial begin
    data_t exp [N_PORTS];
    bit    seen [N_PORTS];
    for (int p = 0; p < N_PORTS; p++) begin
      req[p]  = '0;
      exp[p]  = '0;
      seen[p] = 1'b0;
    end
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      for (int p = 0; p < N_PORTS; p++) begin
        req[p].en   = ($urandom_range(99) < 70);
        req[p].addr = addr_t'($urandom_range(255));
        if (req[p].en) begin
          exp[p]  = image(int'(req[p].addr));
          seen[p] = 1'b1;
        end
      end
      @(posedge clk);
      #1;
      for (int p = 0; p < N_PORTS; p++) begin
        if (seen[p]) check("image", rdata[p], exp[p]);
        if (req[p].en) check("blank", rdata_z[p], '0);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
