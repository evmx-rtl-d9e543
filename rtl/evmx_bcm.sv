// Bytecode memory (BCM) of EVMx.
//
// Holds the bytecode of the smart contract being executed, one byte per word.
// The host writes it byte by byte through the bytcd port before execution; the
// controller reads the byte at the program counter and, for jump checks, the
// byte at a jump target. Depth (32768 bytes, hence a 15-bit address) follows
// the paper. Writes are synchronous; both reads are combinational (this
// design's choice, so that the opcode at the PC is seen in the same cycle).
// Bytes beyond what the host wrote read as 0x00 (STOP), as in Ethereum.
// 'code_len' is one past the highest byte written since the last write to
// address 0: loading a new contract from address 0 upward restarts it, so
// bytes left over from a longer earlier contract read as 0x00 and CODESIZE
// reports the new length. This length rule is this design's choice.
module evmx_bcm #(
  parameter int unsigned DEPTH = 32768,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          wr_en,      // bytcd write strobe
  input  logic [AW-1:0] wr_addr,
  input  logic [7:0]    wr_data,
  input  logic [AW-1:0] rd_addr,    // program counter
  output logic [7:0]    rd_data,
  input  logic [AW-1:0] chk_addr,   // jump target
  output logic [7:0]    chk_data,
  output logic [AW:0]   code_len    // one past the highest byte written
);
  logic [7:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (wr_en && wr_addr == '0) code_len <= {{AW{1'b0}}, 1'b1};  // new code image
    else if (wr_en && ({1'b0, wr_addr} >= code_len)) code_len <= {1'b0, wr_addr} + 1'b1;
  end

  assign rd_data  = ({1'b0, rd_addr}  < code_len) ? mem[rd_addr]  : 8'h00;
  assign chk_data = ({1'b0, chk_addr} < code_len) ? mem[chk_addr] : 8'h00;
endmodule
