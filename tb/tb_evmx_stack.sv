// Self-checking testbench of the stack. Drives random pushes, pops,
// pop-and-push, in-place writes below the top and reads at depth 0..16,
// against a queue model; then fills the stack to its 1024 entries, checks
// that one more push is refused with 'fault', empties it and checks that a
// pop of the empty stack is refused too.
// No ports; 10 ns clock, watchdog 100000 cycles. Depth and word width are
// the paper's; the fault-on-refusal behaviour is this design's.
module tb_evmx_stack;
  import evmx_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0, push = 0, pop = 0, wr_at = 0, fault;
  word_t push_data = '0, wr_data = '0, rd_data, top;
  logic [4:0] wr_idx = 0, rd_idx = 0;
  logic [10:0] count;
  word_t model [1024];
  int mn = 0;
  evmx_stack dut (.*);
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
    int n;
    @(negedge clk); rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      int kind;
      kind = $urandom_range(0, 9);
      push = 0; pop = 0; wr_at = 0;
      n = mn;
      rd_idx = 5'($urandom_range(0, 16));
      #1;
      if (n > 0) chk(top == model[n-1], "top");
      if (int'(rd_idx) < n) chk(rd_data == model[n-1-rd_idx], $sformatf("read depth %0d", rd_idx));
      if (kind < 5 && n < 200) begin push = 1; push_data = rw(); model[n] = push_data; mn = n + 1; end
      else if (kind < 7 && n > 0) begin pop = 1; mn = n - 1; end
      else if (kind == 7 && n > 0) begin push = 1; pop = 1; push_data = rw(); model[n-1] = push_data; end
      else if (n > 0) begin
        wr_at = 1; wr_idx = 5'($urandom_range(0, (n > 17) ? 16 : n - 1)); wr_data = rw();
        model[n-1-wr_idx] = wr_data;
      end
      @(negedge clk);
      chk(int'(count) == mn, "count");
    end
    push = 0; pop = 0; wr_at = 0;
    clr = 1; @(negedge clk); clr = 0; mn = 0;
    chk(count == 0, "clear");
    for (int i = 0; i < 1024; i++) begin
      push = 1; push_data = word_t'(i); @(negedge clk);
    end
    push = 0; #1; chk(count == 1024 && !fault, "full");
    push = 1; push_data = 256'hdead; #1;
    chk(fault, "overflow refused");
    @(negedge clk); push = 0; #1;
    chk(count == 1024 && top == 1023, "full stack unchanged");
    rd_idx = 16; #1; chk(rd_data == 1007, "depth 16 of full stack");
    for (int i = 0; i < 1024; i++) begin
      #1; chk(top == word_t'(32'(1023 - i)), "pop order");
      pop = 1; @(negedge clk);
    end
    #1; chk(count == 0 && fault, "underflow refused");
    pop = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
