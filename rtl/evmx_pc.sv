// Program counter (PC) of EVMx.
//
// A 15-bit counter that addresses the whole bytecode memory. It clears to zero
// when execution starts, advances by one for every opcode or operand byte the
// controller consumes, and loads a target popped from the stack for JUMP and
// JUMPI. A load wins over an increment in the same cycle. One register,
// updated on the rising clock edge; synchronous active-low reset. The 15-bit
// width and the stack-to-PC path follow the paper.
module evmx_pc #(
  parameter int unsigned AW = 15
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,       // back to address zero (start of execution)
  input  logic          inc,
  input  logic          load,
  input  logic [AW-1:0] load_val,
  output logic [AW-1:0] pc
);
  always_ff @(posedge clk) begin
    if (!rst_n || clr) pc <= '0;
    else if (load)     pc <= load_val;
    else if (inc)      pc <= pc + 1'b1;
  end
endmodule
