// Self-checking testbench of the return memory: copies random 1..32-byte
// pieces in, sets the length, and reads back 32-byte windows, checking that
// bytes at or past the length read as zero.
// No ports; 10 ns clock, watchdog 100000 cycles. The paper gives the block;
// the zero-past-length rule checked is this design's.
module tb_evmx_rtn;
  import evmx_pkg::*;
  localparam int N = 2768;
  logic clk = 0, rst_n = 0, wr_en = 0, set_len = 0;
  logic [31:0] wr_addr = 0, len_in = 0, len, rd_addr = 0;
  logic [5:0] wr_bytes = 32;
  word_t wr_data = '0, rd_data;
  logic [7:0] model [N];
  evmx_rtn dut (.*);
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
    word_t e;
    int l;
    @(negedge clk); rst_n = 1;
    for (int i = 0; i < N; i++) model[i] = 8'h00;
    // fill the whole memory so nothing random is read
    for (int a = 0; a < N; a += 32) begin
      wr_en = 1; wr_addr = 32'(a); wr_bytes = 32; wr_data = '0; @(negedge clk);
    end
    for (int i = 0; i < 500; i++) begin
      wr_en = 1; wr_addr = 32'($urandom_range(0, N - 1)); wr_bytes = 6'($urandom_range(1, 32)); wr_data = rw();
      for (int j = 0; j < int'(wr_bytes); j++)
        if (int'(wr_addr) + j < N) model[int'(wr_addr) + j] = wr_data[255-8*j -: 8];
      @(negedge clk);
    end
    wr_en = 0;
    for (int k = 0; k < 20; k++) begin
      l = $urandom_range(0, N);
      set_len = 1; len_in = 32'(l); @(negedge clk); set_len = 0;
      chk(int'(len) == l, "length");
      for (int i = 0; i < 50; i++) begin
        rd_addr = 32'($urandom_range(0, N)); #1;
        for (int j = 0; j < 32; j++) e[255-8*j -: 8] = (int'(rd_addr) + j < l) ? model[int'(rd_addr) + j] : 8'h00;
        chk(rd_data == e, $sformatf("read at %0d len %0d", rd_addr, l));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
