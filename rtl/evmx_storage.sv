// Persistent storage (STR) of EVMx: a table of 1024 256-bit values.
//
// The low bits of the 256-bit key select the entry, so keys that agree in
// those bits share an entry: the paper accepts this limit on the number of
// key-value pairs. SSTORE writes on the clock edge; SLOAD reads
// combinationally. A second read port gives the host access to stored values
// (oStore). Storage keeps its contents across executions and reset; it is
// initialised to zero, the value of every unset Ethereum storage slot.
// Depth and key-as-address follow the paper; the host port is this design's.
module evmx_storage
  import evmx_pkg::*;
#(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned KW    = $clog2(DEPTH)
) (
  input  logic  clk,
  input  logic  wr_en,
  input  word_t key,
  input  word_t wdata,
  output word_t rdata,
  input  word_t host_key,
  output word_t host_rdata
);
  word_t mem [DEPTH];

  initial begin
    for (int i = 0; i < int'(DEPTH); i++) mem[i] = '0;
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[key[KW-1:0]] <= wdata;
  end

  assign rdata      = mem[key[KW-1:0]];
  assign host_rdata = mem[host_key[KW-1:0]];
endmodule
