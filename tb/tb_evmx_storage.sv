// Self-checking testbench of the storage: zero before any write, random
// SSTOREs and SLOADs against a model indexed by the low 10 key bits (so keys
// that share them alias, as designed), and the host read port.
// No ports; 10 ns clock, watchdog 100000 cycles. The 1024-entry depth and
// key-as-address are the paper's; the aliasing model follows from them.
module tb_evmx_storage;
  import evmx_pkg::*;
  logic clk = 0, wr_en = 0;
  word_t key = '0, wdata = '0, rdata, host_key = '0, host_rdata;
  word_t model [1024];
  evmx_storage dut (.*);
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
    for (int i = 0; i < 1024; i++) model[i] = '0;
    @(negedge clk);
    for (int i = 0; i < 4000; i++) begin
      key = rw(); host_key = rw(); #1;
      chk(rdata == model[key[9:0]], "SLOAD");
      chk(host_rdata == model[host_key[9:0]], "host read");
      if ($urandom_range(0, 1) == 1) begin
        wr_en = 1; wdata = rw(); model[key[9:0]] = wdata;
      end
      @(negedge clk); wr_en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
