// Return memory (RTN) of EVMx.
//
// Receives the data a contract hands back with RETURN or REVERT: the
// controller copies it out of MEM 32 bytes per cycle. A write stores the
// first 'wr_bytes' bytes of 'wr_data' (1..32; the first byte in bits
// [255:248], as MEM reads them) at wr_addr onward. 'set_len' records the
// length of the returned data. The host reads it back through retVal, 32 bytes
// at 'rd_addr' per cycle, combinationally; bytes at or past the recorded
// length read as zero. The paper gives the block and the MEM-to-RTN path; its
// size (same as MEM) and the port details are this design's choices.
module evmx_rtn
  import evmx_pkg::*;
#(
  parameter int unsigned BYTES = 2768,
  parameter int unsigned AW    = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [5:0]    wr_bytes,
  input  word_t         wr_data,
  input  logic          set_len,
  input  logic [AW-1:0] len_in,
  output logic [AW-1:0] len,
  input  logic [AW-1:0] rd_addr,
  output word_t         rd_data
);
  logic [7:0] mem [BYTES];

  always_ff @(posedge clk) begin
    if (!rst_n)       len <= '0;
    else if (set_len) len <= len_in;
  end

  always_ff @(posedge clk) begin
    if (wr_en)
      for (int i = 0; i < 32; i++)
        if (i < int'(wr_bytes) && {1'b0, wr_addr} + (AW+1)'(i) < (AW+1)'(BYTES))
          mem[wr_addr + AW'(i)] <= wr_data[255-8*i -: 8];
  end

  always_comb begin
    for (int i = 0; i < 32; i++) begin
      if ({1'b0, rd_addr} + (AW+1)'(i) < {1'b0, len} &&
          {1'b0, rd_addr} + (AW+1)'(i) < (AW+1)'(BYTES))
        rd_data[255-8*i -: 8] = mem[rd_addr + AW'(i)];
      else
        rd_data[255-8*i -: 8] = 8'h00;
    end
  end
endmodule
