// Volatile memory (MEM) of EVMx: byte-addressable, BYTES one-byte words.
//
// One address, 'oft', serves reads and writes. A read returns the 32 bytes
// starting at oft, the byte at oft in bits [255:248] (EVM big-endian order);
// bytes past the end read as zero. A write stores the lowest 'sze' bytes of
// 'wdata' (1..32) at oft onward, big-endian, so sze = 32 is an MSTORE and
// sze = 1 an MSTORE8; bytes past the end are dropped. 'clr' starts a sweep that
// zeroes the memory 32 bytes per cycle (EVM memory starts zeroed for each
// execution); 'clr_busy' is high until it is done. Writes take effect on the
// next clock edge; reads are combinational.
// From the paper: the size, byte addressing, 1- or 32-byte writes, 32-byte
// reads, and the offset/size addressing. The size port covering any byte count
// and the clearing sweep are this design's choices.
module evmx_mem
  import evmx_pkg::*;
#(
  parameter int unsigned BYTES = 2768,
  parameter int unsigned AW    = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  output logic          clr_busy,
  input  logic [AW-1:0] oft,
  input  logic          wr_en,
  input  logic [5:0]    sze,      // bytes to write, 1..32
  input  word_t         wdata,
  output word_t         rdata
);
  localparam int unsigned CW = $clog2(BYTES / 32 + 2);
  logic [7:0] mem [BYTES];
  logic [CW-1:0] clr_ptr;

  // Combinational 32-byte read.
  always_comb begin
    for (int i = 0; i < 32; i++) begin
      if ({1'b0, oft} + (AW+1)'(i) < (AW+1)'(BYTES))
        rdata[255-8*i -: 8] = mem[oft + AW'(i)];
      else
        rdata[255-8*i -: 8] = 8'h00;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      clr_busy <= 1'b0;
      clr_ptr  <= '0;
    end else if (clr) begin
      clr_busy <= 1'b1;
      clr_ptr  <= '0;
    end else if (clr_busy) begin
      clr_ptr <= clr_ptr + 1'b1;
      if (32 * (int'(clr_ptr) + 1) >= BYTES) clr_busy <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (clr_busy) begin
      for (int i = 0; i < 32; i++)
        if (32 * int'(clr_ptr) + i < BYTES) mem[32 * int'(clr_ptr) + i] <= 8'h00;
    end else if (wr_en) begin
      for (int i = 0; i < 32; i++)
        if (i < int'(sze) && {1'b0, oft} + (AW+1)'(i) < (AW+1)'(BYTES))
          mem[oft + AW'(i)] <= wdata[8*(int'(sze)-1-i) +: 8];
    end
  end
endmodule
