// Stack (STK) of EVMx: 1024 words of 256 bits, last in first out.
//
// One write per cycle: push writes at the stack pointer, pop-and-push in the
// same cycle replaces the top, and wr_at writes the entry 'wr_idx' places below
// the top without moving the pointer (used by SWAPn). Reads are combinational:
// 'top' is the top entry and 'rd_data' the entry 'rd_idx' places below it
// (DUPn, SWAPn). 'count' is the number of entries. Pushing a full stack or
// popping an empty one is refused and raises 'fault' for that cycle; the
// controller checks 'count' before it acts, so a fault means a controller bug.
// Depth and width follow the paper; the port set is this design's choice.
module evmx_stack
  import evmx_pkg::*;
#(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned SPW   = $clog2(DEPTH) + 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clr,
  input  logic           push,
  input  word_t          push_data,
  input  logic           pop,
  input  logic           wr_at,
  input  logic [4:0]     wr_idx,
  input  word_t          wr_data,
  input  logic [4:0]     rd_idx,
  output word_t          rd_data,
  output word_t          top,
  output logic [SPW-1:0] count,
  output logic           fault
);
  localparam int unsigned AW = $clog2(DEPTH);
  word_t mem [DEPTH];
  logic [SPW-1:0] sp;
  logic [SPW-1:0] top_pos, rd_pos, wr_pos;

  assign count  = sp;
  assign top_pos = sp - 1'b1;
  assign rd_pos = sp - 1'b1 - SPW'(rd_idx);
  assign wr_pos = sp - 1'b1 - SPW'(wr_idx);
  assign top     = (sp != 0) ? mem[top_pos[AW-1:0]] : '0;
  assign rd_data = (SPW'(rd_idx) < sp) ? mem[rd_pos[AW-1:0]] : '0;

  always_comb begin
    fault = 1'b0;
    if (pop && sp == 0) fault = 1'b1;
    if (push && !pop && sp == SPW'(DEPTH)) fault = 1'b1;
    if (wr_at && SPW'(wr_idx) >= sp) fault = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clr) begin
      sp <= '0;
    end else if (!fault) begin
      if (push && pop)      mem[top_pos[AW-1:0]] <= push_data;
      else if (push)        begin mem[sp[AW-1:0]] <= push_data; sp <= sp + 1'b1; end
      else if (pop)         sp <= sp - 1'b1;
      else if (wr_at)       mem[wr_pos[AW-1:0]] <= wr_data;
    end
  end
endmodule
