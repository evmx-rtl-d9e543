// Self-checking testbench of the Keccak256 unit. Hashes the empty message,
// "abc" and 135-, 136- and 300-byte messages (byte i = 7i+3 mod 256), which
// cover a message ending one byte short of a block, exactly on a block
// boundary and spanning three blocks, and compares the digests with known
// Keccak256 values. Also checks the permutation time: 24 cycles per block.
// No ports; 10 ns clock, watchdog 200000 cycles. Expected digests are
// Keccak256 (Ethereum) values; the 24-cycle permutation is this design's.
module tb_evmx_keccak;
  logic clk = 0, rst_n = 0;
  logic init = 0, in_valid = 0, finish = 0, ready, done;
  logic [7:0] in_byte = 0;
  logic [255:0] digest;
  int checks = 0, failures = 0;

  evmx_keccak dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic hash(input int n, input bit abc, input logic [255:0] expect_d);
    int cyc;
    @(negedge clk); init = 1; @(negedge clk); init = 0;
    for (int i = 0; i < n; i++) begin
      while (!ready) @(negedge clk);
      in_valid = 1;
      in_byte  = abc ? 8'(8'h61 + i) : 8'((i * 7 + 3) & 255);
      @(negedge clk);
      in_valid = 0;
    end
    while (!ready) @(negedge clk);
    finish = 1; @(negedge clk); finish = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (digest !== expect_d) begin
      failures++; $display("FAIL n=%0d digest %h expected %h", n, digest, expect_d);
    end
    checks++;
    if (cyc != 25) begin
      failures++; $display("FAIL n=%0d final block took %0d cycles, expected 25", n, cyc);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    hash(0,   0, 256'hc5d2460186f7233c927e7db2dcc703c0e500b653ca82273b7bfad8045d85a470);
    hash(3,   1, 256'h4e03657aea45a94fc7d47ba826c8d667c0d1e6e33a64a036ec44f58fa12d6c45);
    hash(135, 0, 256'h00ef96af9cf4b24c7f269d922294444a197d0a33638c2e56634c57e892103a8f);
    hash(136, 0, 256'h742061bcad767ed4c4f5883b1dcb1aad11afdcc140dc469d953759b127b9f9ed);
    hash(300, 0, 256'hfa75f2293be9f9a14dcdeeff53f7b91ff6a2b1331b13886e69077ab1cf8252a9);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
