// Self-checking testbench of the bytecode memory: writes random bytes through
// the load port, reads them back on both read ports, and checks that bytes
// beyond the loaded code read as 0x00 and that the code length tracks the
// highest byte written, and that a new load from address 0 restarts the
// length so bytes of the earlier, longer code read as 0x00.
// No ports; 10 ns clock, watchdog 100000 cycles. The 32768-byte depth is
// the paper's; the read-beyond-code rule is this design's.
module tb_evmx_bcm;
  logic clk = 0;
  logic wr_en = 0;
  logic [14:0] wr_addr = 0, rd_addr = 0, chk_addr = 0;
  logic [7:0] wr_data = 0, rd_data, chk_data;
  logic [15:0] code_len;
  logic [7:0] ref_mem [512];
  evmx_bcm dut (.*);
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    @(negedge clk);
    for (int i = 0; i < 300; i++) begin
      wr_en = 1; wr_addr = 15'(i); wr_data = 8'($urandom); ref_mem[i] = wr_data;
      @(negedge clk);
    end
    wr_en = 0;
    chk(code_len == 300, "code length 300");
    for (int i = 0; i < 400; i++) begin
      rd_addr = 15'(i); chk_addr = 15'(399 - i); #1;
      chk(rd_data == ((i < 300) ? ref_mem[i] : 8'h00), $sformatf("read %0d", i));
      chk(chk_data == ((399 - i < 300) ? ref_mem[399 - i] : 8'h00), $sformatf("check port %0d", 399 - i));
    end
    // the top address is reachable
    wr_en = 1; wr_addr = 15'h7fff; wr_data = 8'h5b; @(negedge clk); wr_en = 0;
    rd_addr = 15'h7fff; #1;
    chk(rd_data == 8'h5b && code_len == 16'h8000, "last byte of 32768");
    // a shorter code image loaded from address 0 replaces the old one
    for (int i = 0; i < 10; i++) begin
      wr_en = 1; wr_addr = 15'(i); wr_data = 8'(i + 1); ref_mem[i] = wr_data;
      @(negedge clk);
    end
    wr_en = 0;
    chk(code_len == 10, $sformatf("new code length %0d", code_len));
    for (int i = 0; i < 20; i++) begin
      rd_addr = 15'(i); #1;
      chk(rd_data == ((i < 10) ? ref_mem[i] : 8'h00), $sformatf("new image read %0d", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
