// Self-checking testbench of the byte-addressable memory. Clears it (and
// checks the sweep takes ceil(2768/32) = 87 cycles), then applies random
// writes of 1..32 bytes at random byte offsets, including ones that run past
// the end, and random 32-byte reads, against a byte-array model.
// No ports; 10 ns clock, watchdog 100000 cycles. Size, byte addressing and
// 1/32-byte writes are the paper's; the clear sweep is this design's.
module tb_evmx_mem;
  import evmx_pkg::*;
  localparam int N = 2768;
  logic clk = 0, rst_n = 0, clr = 0, clr_busy, wr_en = 0;
  logic [31:0] oft = 0;
  logic [5:0] sze = 32;
  word_t wdata = '0, rdata;
  logic [7:0] model [N];
  evmx_mem dut (.*);
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
  function automatic word_t rw();
    return {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
  endfunction
  initial begin
    int cyc;
    word_t e;
    @(negedge clk); rst_n = 1;
    clr = 1; @(negedge clk); clr = 0;
    cyc = 0;
    while (clr_busy) begin @(negedge clk); cyc++; end
    chk(cyc == 87, $sformatf("clear took %0d cycles", cyc));
    for (int i = 0; i < N; i++) model[i] = 8'h00;
    for (int i = 0; i < 3000; i++) begin
      oft = ($urandom_range(0, 9) == 0) ? 32'($urandom_range(N - 40, N + 5)) : 32'($urandom_range(0, N - 1));
      #1;
      for (int j = 0; j < 32; j++) e[255-8*j -: 8] = (int'(oft) + j < N) ? model[int'(oft) + j] : 8'h00;
      chk(rdata == e, $sformatf("read at %0d", oft));
      if ($urandom_range(0, 1) == 1) begin
        wr_en = 1; wdata = rw();
        sze = ($urandom_range(0, 2) == 0) ? 6'd32 : ($urandom_range(0, 1) == 1 ? 6'd1 : 6'($urandom_range(1, 32)));
        for (int j = 0; j < int'(sze); j++)
          if (int'(oft) + j < N) model[int'(oft) + j] = wdata[8*(int'(sze)-1-j) +: 8];
      end
      @(negedge clk); wr_en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
