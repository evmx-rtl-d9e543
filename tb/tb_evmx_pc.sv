// Self-checking testbench of the program counter: reset and clear to zero,
// count-up, jump load (which wins over an increment) and wrap at 15 bits.
// No ports; 10 ns clock, watchdog 10000 cycles. The 15-bit width and the
// jump load are the paper's; load-over-increment priority is this design's.
module tb_evmx_pc;
  logic clk = 0, rst_n = 0, clr = 0, inc = 0, load = 0;
  logic [14:0] load_val = 0, pc;
  evmx_pc dut (.*);
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  initial begin
    repeat (10000) @(posedge clk);
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
    logic [14:0] exp_pc;
    @(negedge clk); rst_n = 1; #1;
    chk(pc == 0, "reset to 0");
    exp_pc = 0;
    for (int i = 0; i < 200; i++) begin
      inc = ($urandom_range(0, 1) == 1);
      load = ($urandom_range(0, 9) == 0);
      load_val = 15'($urandom);
      @(negedge clk);
      if (load) exp_pc = load_val; else if (inc) exp_pc = exp_pc + 1'b1;
      chk(pc == exp_pc, $sformatf("step %0d pc=%0d expected %0d", i, pc, exp_pc));
    end
    load = 1; inc = 0; load_val = 15'h7fff; @(negedge clk);
    load = 0; inc = 1; @(negedge clk); inc = 0;
    chk(pc == 0, "wrap");
    inc = 1; @(negedge clk); clr = 1; @(negedge clk); clr = 0; inc = 0;
    chk(pc == 0, "clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
