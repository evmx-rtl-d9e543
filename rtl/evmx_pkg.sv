// Shared types and constants of the EVMx smart-contract processor.
//
// Holds the word width of the EVM (256 bits), the opcode values the
// controller decodes (the standard Ethereum opcode numbering), the static gas
// cost of each supported opcode, the ALU operation codes and the controller's
// halt status. The opcode numbers and gas costs follow the Ethereum
// specification; the ALU and status encodings are this design's own.
package evmx_pkg;

  localparam int unsigned WORD = 256;
  typedef logic [WORD-1:0] word_t;

  // Opcodes decoded by the controller (Ethereum numbering).
  localparam logic [7:0] OP_STOP      = 8'h00;
  localparam logic [7:0] OP_ADD       = 8'h01;
  localparam logic [7:0] OP_MUL       = 8'h02;
  localparam logic [7:0] OP_SUB       = 8'h03;
  localparam logic [7:0] OP_DIV       = 8'h04;
  localparam logic [7:0] OP_SDIV      = 8'h05;
  localparam logic [7:0] OP_MOD       = 8'h06;
  localparam logic [7:0] OP_SMOD      = 8'h07;
  localparam logic [7:0] OP_ADDMOD    = 8'h08;
  localparam logic [7:0] OP_MULMOD    = 8'h09;
  localparam logic [7:0] OP_EXP       = 8'h0A;
  localparam logic [7:0] OP_SIGNEXTEND= 8'h0B;
  localparam logic [7:0] OP_LT        = 8'h10;
  localparam logic [7:0] OP_GT        = 8'h11;
  localparam logic [7:0] OP_SLT       = 8'h12;
  localparam logic [7:0] OP_SGT       = 8'h13;
  localparam logic [7:0] OP_EQ        = 8'h14;
  localparam logic [7:0] OP_ISZERO    = 8'h15;
  localparam logic [7:0] OP_AND       = 8'h16;
  localparam logic [7:0] OP_OR        = 8'h17;
  localparam logic [7:0] OP_XOR       = 8'h18;
  localparam logic [7:0] OP_NOT       = 8'h19;
  localparam logic [7:0] OP_BYTE      = 8'h1A;
  localparam logic [7:0] OP_SHL       = 8'h1B;
  localparam logic [7:0] OP_SHR       = 8'h1C;
  localparam logic [7:0] OP_SAR       = 8'h1D;
  localparam logic [7:0] OP_KECCAK256 = 8'h20;
  localparam logic [7:0] OP_ADDRESS   = 8'h30;
  localparam logic [7:0] OP_CALLER    = 8'h33;
  localparam logic [7:0] OP_CALLVALUE = 8'h34;
  localparam logic [7:0] OP_CODESIZE  = 8'h38;
  localparam logic [7:0] OP_CODECOPY  = 8'h39;
  localparam logic [7:0] OP_POP       = 8'h50;
  localparam logic [7:0] OP_MLOAD     = 8'h51;
  localparam logic [7:0] OP_MSTORE    = 8'h52;
  localparam logic [7:0] OP_MSTORE8   = 8'h53;
  localparam logic [7:0] OP_SLOAD     = 8'h54;
  localparam logic [7:0] OP_SSTORE    = 8'h55;
  localparam logic [7:0] OP_JUMP      = 8'h56;
  localparam logic [7:0] OP_JUMPI     = 8'h57;
  localparam logic [7:0] OP_PC        = 8'h58;
  localparam logic [7:0] OP_MSIZE     = 8'h59;
  localparam logic [7:0] OP_GAS       = 8'h5A;
  localparam logic [7:0] OP_JUMPDEST  = 8'h5B;
  localparam logic [7:0] OP_PUSH0     = 8'h5F;
  localparam logic [7:0] OP_PUSH1     = 8'h60;
  localparam logic [7:0] OP_PUSH32    = 8'h7F;
  localparam logic [7:0] OP_DUP1      = 8'h80;
  localparam logic [7:0] OP_DUP16     = 8'h8F;
  localparam logic [7:0] OP_SWAP1     = 8'h90;
  localparam logic [7:0] OP_SWAP16    = 8'h9F;
  localparam logic [7:0] OP_CREATE    = 8'hF0;
  localparam logic [7:0] OP_RETURN    = 8'hF3;
  localparam logic [7:0] OP_CREATE2   = 8'hF5;
  localparam logic [7:0] OP_REVERT    = 8'hFD;

  // Operations of the ALU.
  typedef enum logic [4:0] {
    ALU_ADD, ALU_SUB, ALU_MUL, ALU_DIV, ALU_MOD,
    ALU_LT, ALU_GT, ALU_SLT, ALU_SGT, ALU_EQ, ALU_ISZERO,
    ALU_AND, ALU_OR, ALU_XOR, ALU_NOT, ALU_BYTE,
    ALU_SHL, ALU_SHR, ALU_SAR,
    ALU_SDIV, ALU_SMOD, ALU_EXP, ALU_SIGNEXT, ALU_ADDMOD, ALU_MULMOD
  } alu_op_e;

  // Why execution ended.
  typedef enum logic [2:0] {
    ST_RUNNING   = 3'd0,
    ST_STOPPED   = 3'd1,   // STOP or end of code
    ST_RETURNED  = 3'd2,   // RETURN, data in RTN
    ST_REVERTED  = 3'd3,   // REVERT, data in RTN
    ST_OUT_OF_GAS= 3'd4,
    ST_INVALID   = 3'd5,   // undefined opcode, bad jump, stack fault
    ST_CAPACITY  = 3'd6,   // access beyond the memory this hardware holds
    ST_IDLE      = 3'd7
  } status_e;

  // Static gas of an opcode (Ethereum schedule, warm storage accesses).
  function automatic logic [15:0] static_gas(input logic [7:0] op);
    logic [15:0] g;
    g = 16'd3;
    unique casez (op)
      OP_STOP, OP_RETURN, OP_REVERT:                 g = 16'd0;
      OP_JUMPDEST:                                   g = 16'd1;
      OP_ADDRESS, OP_CALLER, OP_CALLVALUE, OP_POP,
      OP_PC, OP_PUSH0, OP_CODESIZE, OP_MSIZE,
      OP_GAS:                                        g = 16'd2;
      OP_MUL, OP_DIV, OP_SDIV, OP_MOD, OP_SMOD,
      OP_SIGNEXTEND:                                 g = 16'd5;
      OP_ADDMOD, OP_MULMOD:                          g = 16'd8;
      OP_EXP:                                        g = 16'd10;
      OP_JUMP:                                       g = 16'd8;
      OP_JUMPI:                                      g = 16'd10;
      OP_KECCAK256:                                  g = 16'd30;
      OP_SLOAD, OP_SSTORE:                           g = 16'd100;
      OP_CREATE, OP_CREATE2:                         g = 16'd32000;
      default:                                       g = 16'd3;
    endcase
    return g;
  endfunction

endpackage
