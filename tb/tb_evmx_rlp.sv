// Self-checking testbench of the RLP encoder: encodes [sAddr, nonce] for
// nonces 0, 1, 0x7f, 0x80, 300 and 2^40+5 and compares the bytes and the
// length with hand-worked RLP encodings.
// No ports and no clock (the encoder is combinational); a watchdog still
// bounds the run. The RLP rules checked are Ethereum's.
module tb_evmx_rlp;
  logic [159:0] s_addr = 160'h6ac7ea33f8831ea9dcc53393aaa88b25a785dbf0;
  logic [63:0]  s_noc;
  logic [255:0] enc;
  logic [5:0]   len;
  int checks = 0, failures = 0;

  evmx_rlp dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [63:0] n, input logic [255:0] e, input int l);
    s_noc = n; #1;
    checks++;
    if (enc !== e || int'(len) != l) begin
      failures++; $display("FAIL nonce %0d: %h/%0d expected %h/%0d", n, enc, len, e, l);
    end
  endtask

  initial begin
    check(0,    {8'hd6, 8'h94, 160'h6ac7ea33f8831ea9dcc53393aaa88b25a785dbf0, 8'h80, 72'h0}, 23);
    check(1,    {8'hd6, 8'h94, 160'h6ac7ea33f8831ea9dcc53393aaa88b25a785dbf0, 8'h01, 72'h0}, 23);
    check(64'h7f,{8'hd6, 8'h94, 160'h6ac7ea33f8831ea9dcc53393aaa88b25a785dbf0, 8'h7f, 72'h0}, 23);
    check(64'h80,{8'hd7, 8'h94, 160'h6ac7ea33f8831ea9dcc53393aaa88b25a785dbf0, 16'h8180, 64'h0}, 24);
    check(300,  {8'hd8, 8'h94, 160'h6ac7ea33f8831ea9dcc53393aaa88b25a785dbf0, 24'h82012c, 56'h0}, 25);
    check(64'h0000_0100_0000_0005,
                {8'hdc, 8'h94, 160'h6ac7ea33f8831ea9dcc53393aaa88b25a785dbf0, 56'h86_010000000005, 24'h0}, 29);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
