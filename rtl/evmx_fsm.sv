// Controller (FSM) and register datapath of EVMx.
//
// Fetches one opcode per dispatch from the bytecode memory at the program
// counter and sequences the transfers between the stack, memory, storage,
// return memory, ALU, Keccak unit and RLP encoder. It also holds the datapath
// registers of the block diagram:
//   r0   left-shift register collecting PUSHn operand bytes (PUSH1 goes
//        through 'pad', the zero-extension of one byte to 32 bytes);
//   r1   first popped value (DUP/SWAP data, MSTORE data, CREATE value = 'val');
//   r2   size operand / second SWAP operand;  r3  offset, key, first ALU operand;
//   r4   ALU result;  r5  left-shift register feeding MEM data into KEC;
//   r6   the init-code digest d of CREATE2;
//   kreg the delta register k = 0xff || sAddr || salt || d (85 bytes): it
//        takes salt as it is popped and d from r6 one cycle later; it also
//        holds the RLP encoding for CREATE;  ADR keeps the low 20
//        bytes of a digest as the new contract address.
//
// Cycle counts per opcode, from its dispatch to the next dispatch, are built
// to match the latencies reported for EVMx at 7 ns per cycle: POP, ADDRESS,
// CALLER, CALLVALUE 1; PUSH1 2 (PUSHn 1+n); DUP1 3; SLOAD 3; ADD, SUB, EQ,
// AND, OR, SWAP1 4 (iterative ALU operations add their cycles); MSTORE 35; MLOAD
// 37. The 32 cycles of MLOAD/MSTORE are spent computing the memory-expansion
// gas, squaring the word count with a 32-step shift-and-add.
// CREATE2 follows the sequence given for it: pop value to r1, pop offset to
// r3, pop size to r2, hash MEM[offset..+size) through r5 into KEC, load d into
// r6 while popping salt, hash k, push the address.
// CODECOPY copies one byte per cycle from the BCM jump-check port into MEM;
// CODESIZE, MSIZE and GAS push a value in their dispatch cycle; EXP pays its
// per-exponent-byte gas when the exponent is popped; ADDMOD and MULMOD pop
// a into r3 and b into r2 and hand the modulus to the ALU from the stack top.
//
// The set of opcodes, the state sequence, gas rules (Ethereum static costs,
// memory expansion 3w + w*w/512, 6 per hashed word, 3 per copied word, 50
// per EXP exponent byte, warm storage costs) and
// the halt status are this design's choices; the paper gives the block
// diagram, the register roles above and the CREATE2 sequence.
module evmx_fsm
  import evmx_pkg::*;
#(
  parameter int unsigned MEM_BYTES = 2768,
  parameter int unsigned STK_DEPTH = 1024,
  parameter int unsigned PC_W      = 15,
  parameter int unsigned GW        = 64,
  parameter int unsigned INIT_N    = 3,
  localparam int unsigned SPW      = $clog2(STK_DEPTH) + 1
) (
  input  logic            clk,
  input  logic            rst_n,
  // host
  input  logic            start,
  output logic            busy,
  output logic            done,
  output status_e         status,
  output logic            op_fetch,     // pulses when an opcode is dispatched
  output logic [7:0]      op_cur,
  input  word_t           init_data [INIT_N],  // ADDRESS, CALLER, CALLVALUE
  input  logic [159:0]    s_addr,
  output word_t           val,          // r1: value sent to a new contract
  output logic            val_valid,    // pulses when CREATE/CREATE2 pushes its address
  // BCM and PC
  input  logic [7:0]      bc_byte,
  input  logic [7:0]      chk_byte,
  output logic [PC_W-1:0] chk_addr,
  input  logic [PC_W-1:0] pc,
  output logic            pc_clr,
  output logic            pc_inc,
  output logic            pc_load,
  output logic [PC_W-1:0] pc_load_val,
  // STK
  input  word_t           stk_top,
  input  word_t           stk_rd,
  input  logic [SPW-1:0]  stk_count,
  output logic            stk_clr,
  output logic            stk_push,
  output word_t           stk_push_data,
  output logic            stk_pop,
  output logic            stk_wr_at,
  output logic [4:0]      stk_wr_idx,
  output word_t           stk_wr_data,
  output logic [4:0]      stk_rd_idx,
  // MEM
  input  word_t           mem_rdata,
  input  logic            mem_clr_busy,
  output logic            mem_clr,
  output logic [31:0]     mem_oft,
  output logic            mem_wr,
  output logic [5:0]      mem_sze,
  output word_t           mem_wdata,
  // STR
  input  word_t           str_rdata,
  output logic            str_wr,
  output word_t           str_key,
  output word_t           str_wdata,
  // RTN
  output logic            rtn_wr,
  output logic [31:0]     rtn_addr,
  output logic [5:0]      rtn_bytes,
  output word_t           rtn_data,
  output logic            rtn_set_len,
  output logic [31:0]     rtn_len,
  // GS
  input  logic            gas_enough,
  input  logic [GW-1:0]   gas_left,
  input  logic [PC_W:0]   code_len,     // CODESIZE
  output logic            gas_load,
  output logic            gas_charge,
  output logic [GW-1:0]   gas_cost,
  // ALU
  input  logic            alu_done,
  input  word_t           alu_y,
  output logic            alu_start,
  output alu_op_e         alu_op,
  output word_t           alu_a,
  output word_t           alu_b,
  output word_t           alu_c,
  // KEC
  input  logic            kec_ready,
  input  logic            kec_done,
  input  logic [255:0]    kec_digest,
  output logic            kec_init,
  output logic            kec_valid,
  output logic [7:0]      kec_byte,
  output logic            kec_finish,
  // RPL
  input  logic [255:0]    rlp_enc,
  input  logic [5:0]      rlp_len
);
  typedef enum logic [4:0] {
    S_IDLE, S_CLEAR, S_FETCH, S_PUSHB, S_DUP_RD, S_DUP_WR,
    S_SWAP_RD, S_SWAP_WR1, S_SWAP_WR2, S_POP1, S_POP2, S_POP3,
    S_ALU_GO, S_ALU_WAIT, S_PUSH_R4, S_SLOAD, S_MEMX, S_MEMCHG,
    S_MLOAD_RD, S_MLOAD_PUSH, S_HLOAD, S_HFEED, S_HFIN, S_HWAIT,
    S_DELTA, S_RET_COPY, S_CODE_COPY
  } state_e;

  state_e state;
  logic [7:0]  op;           // opcode being executed
  word_t       r0, r1, r2, r3, r4, r5, r6;
  logic [679:0] kreg;        // delta output k, or the RLP encoding
  logic [5:0]  push_left;    // PUSHn bytes still to read
  logic [4:0]  sw_n;         // DUP/SWAP depth
  logic        create2_k;    // CREATE2 is hashing k (second hash)
  logic        h_from_mem;   // KEC fed from r5 (MEM) rather than kreg
  logic [31:0] h_ptr, h_rem;
  logic [5:0]  h_chunk;
  logic [31:0] cp;           // RETURN copy position
  // memory expansion
  logic [31:0] x_w;          // words the access needs
  logic        x_none, x_big;
  logic [63:0] sq_a, sq_acc;
  logic [31:0] sq_b;
  logic [5:0]  sq_cnt;
  logic [31:0] msize_w;      // words in use
  logic [GW-1:0] mem_cost;   // expansion gas paid so far
  logic [31:0] x_hash_w;     // words hashed or copied (KECCAK256, CREATE2, CODECOPY gas)

  // ---------------- opcode classes ----------------
  function automatic logic is_push(input logic [7:0] o);
    return o >= OP_PUSH1 && o <= OP_PUSH32;
  endfunction
  function automatic logic is_dup(input logic [7:0] o);
    return o >= OP_DUP1 && o <= OP_DUP16;
  endfunction
  function automatic logic is_swap(input logic [7:0] o);
    return o >= OP_SWAP1 && o <= OP_SWAP16;
  endfunction
  function automatic logic is_unary(input logic [7:0] o);
    return o == OP_ISZERO || o == OP_NOT;
  endfunction
  function automatic logic is_binary(input logic [7:0] o);
    unique case (o)
      OP_ADD, OP_MUL, OP_SUB, OP_DIV, OP_MOD, OP_LT, OP_GT, OP_SLT, OP_SGT,
      OP_EQ, OP_AND, OP_OR, OP_XOR, OP_BYTE, OP_SHL, OP_SHR, OP_SAR,
      OP_SDIV, OP_SMOD, OP_EXP, OP_SIGNEXTEND: return 1'b1;
      default: return 1'b0;
    endcase
  endfunction
  function automatic logic is_ternary(input logic [7:0] o);
    return o == OP_ADDMOD || o == OP_MULMOD;
  endfunction
  function automatic alu_op_e alu_of(input logic [7:0] o);
    unique case (o)
      OP_ADD: return ALU_ADD;   OP_MUL: return ALU_MUL;   OP_SUB: return ALU_SUB;
      OP_DIV: return ALU_DIV;   OP_MOD: return ALU_MOD;   OP_LT:  return ALU_LT;
      OP_GT:  return ALU_GT;    OP_SLT: return ALU_SLT;   OP_SGT: return ALU_SGT;
      OP_EQ:  return ALU_EQ;    OP_ISZERO: return ALU_ISZERO;
      OP_AND: return ALU_AND;   OP_OR:  return ALU_OR;    OP_XOR: return ALU_XOR;
      OP_NOT: return ALU_NOT;   OP_BYTE: return ALU_BYTE; OP_SHL: return ALU_SHL;
      OP_SHR: return ALU_SHR;   OP_SAR: return ALU_SAR;
      OP_SDIV: return ALU_SDIV; OP_SMOD: return ALU_SMOD; OP_EXP: return ALU_EXP;
      OP_SIGNEXTEND: return ALU_SIGNEXT;
      OP_ADDMOD: return ALU_ADDMOD; OP_MULMOD: return ALU_MULMOD;
      default: return ALU_ADD;
    endcase
  endfunction
  // Stack items an opcode needs, and how much it may grow the stack.
  function automatic logic [4:0] need_of(input logic [7:0] o);
    if (is_dup(o))  return 5'(o - OP_DUP1 + 8'd1);
    if (is_swap(o)) return 5'(o - OP_SWAP1 + 8'd2);
    if (is_binary(o)) return 5'd2;
    unique case (o)
      OP_ISZERO, OP_NOT, OP_POP, OP_MLOAD, OP_SLOAD, OP_JUMP: return 5'd1;
      OP_MSTORE, OP_MSTORE8, OP_SSTORE, OP_JUMPI, OP_KECCAK256,
      OP_RETURN, OP_REVERT:                                   return 5'd2;
      OP_CREATE, OP_CODECOPY, OP_ADDMOD, OP_MULMOD:           return 5'd3;
      OP_CREATE2:                                             return 5'd4;
      default:                                                return 5'd0;
    endcase
  endfunction
  function automatic logic grows(input logic [7:0] o);
    return is_push(o) || is_dup(o) || o == OP_PUSH0 || o == OP_PC ||
           o == OP_ADDRESS || o == OP_CALLER || o == OP_CALLVALUE ||
           o == OP_CODESIZE || o == OP_MSIZE || o == OP_GAS;
  endfunction
  // Opcodes that push one environment value in their dispatch cycle.
  function automatic logic is_env(input logic [7:0] o);
    return o == OP_ADDRESS || o == OP_CALLER || o == OP_CALLVALUE || o == OP_PC ||
           o == OP_PUSH0 || o == OP_CODESIZE || o == OP_MSIZE || o == OP_GAS;
  endfunction
  function automatic logic known(input logic [7:0] o);
    if (is_push(o) || is_dup(o) || is_swap(o) || is_binary(o) || is_unary(o) || is_ternary(o)) return 1'b1;
    unique case (o)
      OP_STOP, OP_KECCAK256, OP_ADDRESS, OP_CALLER, OP_CALLVALUE, OP_POP,
      OP_MLOAD, OP_MSTORE, OP_MSTORE8, OP_SLOAD, OP_SSTORE, OP_JUMP, OP_JUMPI,
      OP_PC, OP_JUMPDEST, OP_PUSH0, OP_CREATE, OP_RETURN, OP_CREATE2,
      OP_REVERT, OP_CODESIZE, OP_MSIZE, OP_GAS, OP_CODECOPY: return 1'b1;
      default:   return 1'b0;
    endcase
  endfunction

  // pad: one bytecode byte zero-extended to a stack word.
  word_t pad_out;
  assign pad_out = word_t'(bc_byte);

  // Jump target check: within the code space and a JUMPDEST.
  logic jump_ok;
  // CODECOPY source: code bytes at r1 + cp; beyond the code space read 0.
  word_t code_pos;
  logic  code_in_range;
  assign code_pos      = r1 + word_t'(cp);
  assign code_in_range = (code_pos[255:PC_W] == '0);
  always_comb begin
    chk_addr = (state == S_POP1) ? stk_top[PC_W-1:0] :
               (state == S_CODE_COPY) ? code_pos[PC_W-1:0] : r3[PC_W-1:0];
    jump_ok  = (state == S_POP1 ? stk_top[255:PC_W] == '0 : r3[255:PC_W] == '0) &&
               chk_byte == OP_JUMPDEST;
  end

  // Memory-expansion set-up from an offset and a size.
  function automatic logic [31:0] words_of(input logic [32:0] n);
    return 32'((n + 33'd31) >> 5);
  endfunction
  logic [32:0] x_end_c;
  logic        x_big_c, x_none_c;
  word_t       x_off_c, x_size_c;
  always_comb begin
    // offset and size of the access being set up this cycle
    x_off_c  = r3;
    x_size_c = stk_top;
    if (state == S_POP1) begin
      x_off_c  = stk_top;
      x_size_c = (op == OP_MSTORE8) ? word_t'(1) : word_t'(32);
    end
    x_none_c = (x_size_c == '0);
    x_end_c  = {1'b0, x_off_c[31:0]} + {1'b0, x_size_c[31:0]};
    x_big_c  = !x_none_c && (x_off_c[255:32] != '0 || x_size_c[255:32] != '0 ||
                             x_end_c > 33'(MEM_BYTES));
  end

  // EXP: 50 gas per significant byte of the exponent (on the stack top).
  logic [GW-1:0] exp_cost;
  always_comb begin
    exp_cost = '0;
    for (int i = 0; i < 32; i++)
      if (stk_top[8*i +: 8] != 8'h00) exp_cost = GW'(50) * GW'(i + 1);
  end

  logic [GW-1:0] new_cost, dyn_cost;
  always_comb begin
    new_cost = GW'(3) * GW'(x_w) + GW'(sq_acc >> 9);
    dyn_cost = ((op == OP_CODECOPY) ? GW'(3) : GW'(6)) * GW'(x_hash_w);
    if (!x_none && x_w > msize_w) dyn_cost = dyn_cost + (new_cost - mem_cost);
  end

  // ---------------- combinational controls ----------------
  always_comb begin
    pc_clr = 1'b0; pc_inc = 1'b0; pc_load = 1'b0; pc_load_val = r3[PC_W-1:0];
    stk_clr = 1'b0; stk_push = 1'b0; stk_push_data = r4; stk_pop = 1'b0;
    stk_wr_at = 1'b0; stk_wr_idx = '0; stk_wr_data = r2; stk_rd_idx = sw_n;
    mem_clr = 1'b0; mem_oft = r3[31:0]; mem_wr = 1'b0; mem_sze = 6'd32; mem_wdata = r1;
    str_wr = 1'b0; str_key = r3; str_wdata = stk_top;
    rtn_wr = 1'b0; rtn_addr = cp; rtn_bytes = 6'd32; rtn_data = mem_rdata;
    rtn_set_len = 1'b0; rtn_len = r2[31:0];
    gas_load = 1'b0; gas_charge = 1'b0; gas_cost = GW'(static_gas(bc_byte));
    alu_start = 1'b0; alu_op = alu_of(op); alu_a = r3;
    alu_b = is_ternary(op) ? r2 : stk_top; alu_c = stk_top;
    kec_init = 1'b0; kec_valid = 1'b0; kec_finish = 1'b0;
    kec_byte = h_from_mem ? r5[255:248] : kreg[679:672];
    op_fetch = 1'b0;

    unique case (state)
      S_IDLE: if (start) begin
        pc_clr = 1'b1; stk_clr = 1'b1; mem_clr = 1'b1; gas_load = 1'b1;
      end
      S_FETCH: begin
        op_fetch = 1'b1;
        if (known(bc_byte) && stk_count >= SPW'(need_of(bc_byte)) &&
            !(grows(bc_byte) && stk_count == SPW'(STK_DEPTH))) begin
          gas_charge = 1'b1;
          if (gas_enough) begin
            if (bc_byte == OP_POP) begin
              stk_pop = 1'b1; pc_inc = 1'b1;
            end else if (is_env(bc_byte)) begin
              stk_push = 1'b1; pc_inc = 1'b1;
              unique case (bc_byte)
                OP_ADDRESS:   stk_push_data = init_data[0];
                OP_CALLER:    stk_push_data = init_data[1];
                OP_CALLVALUE: stk_push_data = init_data[2];
                OP_PC:        stk_push_data = word_t'(pc);
                OP_CODESIZE:  stk_push_data = word_t'(code_len);
                OP_MSIZE:     stk_push_data = word_t'({msize_w, 5'b0});
                OP_GAS:       stk_push_data = word_t'(GW'(gas_left - GW'(2)));  // after its own cost
                default:      stk_push_data = '0;
              endcase
            end else if (bc_byte != OP_STOP) begin
              pc_inc = 1'b1;   // step past the opcode byte
            end
          end
        end
      end
      S_PUSHB: begin
        pc_inc = 1'b1;
        if (push_left == 6'd1) begin
          stk_push = 1'b1;
          stk_push_data = (op == OP_PUSH1) ? pad_out : {r0[247:0], bc_byte};
        end
      end
      S_DUP_WR:   begin stk_push = 1'b1; stk_push_data = r1; end
      S_SWAP_WR1: begin stk_wr_at = 1'b1; stk_wr_idx = '0;   stk_wr_data = r2; end
      S_SWAP_WR2: begin stk_wr_at = 1'b1; stk_wr_idx = sw_n; stk_wr_data = r1; end
      S_POP1: begin
        stk_pop = 1'b1;
        if (op == OP_JUMP) begin
          pc_load = jump_ok; pc_load_val = stk_top[PC_W-1:0];
        end
      end
      S_POP2: begin
        stk_pop = 1'b1;
        if (op == OP_SSTORE) begin
          str_wr = 1'b1;
        end
        if (op == OP_JUMPI) begin
          if (stk_top != '0) pc_load = jump_ok;
        end
      end
      S_POP3: stk_pop = 1'b1;
      S_ALU_GO: begin
        // EXP also pays 50 gas per significant byte of the exponent
        if (op == OP_EXP) begin
          gas_cost = exp_cost; gas_charge = 1'b1;
        end
        if (op != OP_EXP || gas_enough) begin
          alu_start = 1'b1;
          if (!is_unary(op)) stk_pop = 1'b1;
        end
      end
      S_PUSH_R4: begin stk_push = 1'b1; stk_push_data = r4; end
      S_SLOAD:   begin stk_push = 1'b1; stk_push_data = str_rdata; end
      S_MEMX: begin
        if (sq_cnt == 6'd32 && (op == OP_MSTORE || op == OP_MSTORE8)) stk_pop = 1'b1;
      end
      S_MEMCHG: begin
        gas_cost = dyn_cost;
        if (!(x_big && !x_none)) begin
          gas_charge = 1'b1;
          if (gas_enough && (op == OP_MSTORE || op == OP_MSTORE8)) begin
            mem_wr = 1'b1; mem_sze = (op == OP_MSTORE8) ? 6'd1 : 6'd32;
          end
          if (gas_enough && (op == OP_KECCAK256 || op == OP_CREATE || op == OP_CREATE2))
            kec_init = 1'b1;
        end
      end
      S_MLOAD_PUSH: begin stk_push = 1'b1; stk_push_data = r1; end
      S_HLOAD: mem_oft = h_ptr;
      S_HFEED: kec_valid = kec_ready;
      S_HFIN:  kec_finish = kec_ready;
      S_HWAIT: if (kec_done) begin
        if (op == OP_KECCAK256) begin
          stk_push = 1'b1; stk_push_data = kec_digest;
        end else if (op == OP_CREATE2 && !create2_k) begin
          stk_pop = 1'b1; kec_init = 1'b1;   // salt popped while r6 loads
        end else begin
          // ADR: the address is the low 20 bytes of the digest
          stk_push = 1'b1; stk_push_data = {96'b0, kec_digest[159:0]};
        end
      end
      S_CODE_COPY: begin
        mem_oft = r3[31:0] + cp; mem_wr = 1'b1; mem_sze = 6'd1;
        mem_wdata = code_in_range ? word_t'(chk_byte) : '0;
      end
      S_RET_COPY: begin
        mem_oft = r3[31:0] + cp;
        if (r2[31:0] != 0) begin
          rtn_wr = 1'b1;
          rtn_bytes = (r2[31:0] - cp >= 32) ? 6'd32 : 6'(r2[31:0] - cp);
        end
        if (r2[31:0] == 0 || cp + 32 >= r2[31:0]) rtn_set_len = 1'b1;
      end
      default: ;
    endcase
  end

  // ---------------- state register and datapath registers ----------------
  assign busy = (state != S_IDLE);
  assign val  = r1;
  assign op_cur = op;

  task halt(input status_e s);
    status <= s;
    done   <= 1'b1;
    state  <= S_IDLE;
  endtask

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      status <= ST_IDLE;
      done   <= 1'b0;
      val_valid <= 1'b0;
      op <= '0;
      {r0, r1, r2, r3, r4, r5, r6} <= '0;
      kreg <= '0;
      push_left <= '0; sw_n <= '0; create2_k <= 1'b0; h_from_mem <= 1'b0;
      h_ptr <= '0; h_rem <= '0; h_chunk <= '0; cp <= '0;
      x_w <= '0; x_none <= 1'b1; x_big <= 1'b0; x_hash_w <= '0;
      sq_a <= '0; sq_acc <= '0; sq_b <= '0; sq_cnt <= '0;
      msize_w <= '0; mem_cost <= '0;
    end else begin
      done      <= 1'b0;
      val_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          status   <= ST_RUNNING;
          msize_w  <= '0;
          mem_cost <= '0;
          state    <= S_CLEAR;
        end
        S_CLEAR: if (!mem_clr_busy) state <= S_FETCH;

        S_FETCH: begin
          op <= bc_byte;
          sw_n <= is_swap(bc_byte) ? 5'(bc_byte - OP_SWAP1 + 8'd1) : 5'(bc_byte - OP_DUP1);
          if (!known(bc_byte)) halt(ST_INVALID);
          else if (stk_count < SPW'(need_of(bc_byte)) ||
                   (grows(bc_byte) && stk_count == SPW'(STK_DEPTH))) halt(ST_INVALID);
          else if (!gas_enough) halt(ST_OUT_OF_GAS);
          else if (bc_byte == OP_STOP) halt(ST_STOPPED);
          else if (is_push(bc_byte)) begin
            push_left <= 6'(bc_byte - OP_PUSH1 + 8'd1);
            r0 <= '0;
            state <= S_PUSHB;
          end
          else if (is_dup(bc_byte))  state <= S_DUP_RD;
          else if (is_swap(bc_byte)) state <= S_SWAP_RD;
          else if (bc_byte == OP_POP || is_env(bc_byte) || bc_byte == OP_JUMPDEST)
            state <= S_FETCH;
          else state <= S_POP1;
        end

        S_PUSHB: begin
          push_left <= push_left - 1'b1;
          r0 <= {r0[247:0], bc_byte};
          if (push_left == 6'd1) state <= S_FETCH;
        end

        S_DUP_RD: begin r1 <= stk_rd; state <= S_DUP_WR; end
        S_DUP_WR: state <= S_FETCH;
        S_SWAP_RD: begin r1 <= stk_top; r2 <= stk_rd; state <= S_SWAP_WR1; end
        S_SWAP_WR1: state <= S_SWAP_WR2;
        S_SWAP_WR2: state <= S_FETCH;

        S_POP1: begin
          if (op == OP_CREATE || op == OP_CREATE2) r1 <= stk_top;  // value
          else r3 <= stk_top;
          if (is_binary(op) || is_unary(op)) state <= S_ALU_GO;
          else if (op == OP_SLOAD) state <= S_SLOAD;
          else if (op == OP_JUMP) begin
            if (jump_ok) state <= S_FETCH;
            else halt(ST_INVALID);
          end
          else if (op == OP_MLOAD || op == OP_MSTORE || op == OP_MSTORE8) begin
            x_none <= x_none_c; x_big <= x_big_c; x_w <= words_of(x_end_c);
            x_hash_w <= '0;
            sq_a <= 64'(words_of(x_end_c)); sq_b <= words_of(x_end_c);
            sq_acc <= '0; sq_cnt <= 6'd32;
            state <= S_MEMX;
          end
          else state <= S_POP2;
        end

        S_POP2: begin
          if (op == OP_SSTORE) state <= S_FETCH;
          else if (op == OP_JUMPI) begin
            if (stk_top != '0 && !jump_ok) halt(ST_INVALID);
            else state <= S_FETCH;
          end
          else if (op == OP_CREATE || op == OP_CREATE2) begin
            r3 <= stk_top;   // offset
            state <= S_POP3;
          end
          else if (op == OP_CODECOPY) begin
            r1 <= stk_top;   // code offset (destination offset is in r3)
            state <= S_POP3;
          end
          else if (is_ternary(op)) begin
            r2 <= stk_top;   // b; the modulus stays on the stack for S_ALU_GO
            state <= S_ALU_GO;
          end
          else begin          // KECCAK256, RETURN, REVERT: size
            r2 <= stk_top;
            x_none <= x_none_c; x_big <= x_big_c; x_w <= words_of(x_end_c);
            x_hash_w <= (op == OP_KECCAK256) ? words_of({1'b0, stk_top[31:0]}) : '0;
            sq_a <= 64'(words_of(x_end_c)); sq_b <= words_of(x_end_c);
            sq_acc <= '0; sq_cnt <= 6'd32;
            state <= S_MEMX;
          end
        end

        S_POP3: begin         // CREATE, CREATE2: size
          r2 <= stk_top;
          x_none <= x_none_c; x_big <= x_big_c; x_w <= words_of(x_end_c);
          x_hash_w <= (op == OP_CREATE2 || op == OP_CODECOPY) ? words_of({1'b0, stk_top[31:0]}) : '0;
          sq_a <= 64'(words_of(x_end_c)); sq_b <= words_of(x_end_c);
          sq_acc <= '0; sq_cnt <= 6'd32;
          state <= S_MEMX;
        end

        S_ALU_GO: begin
          if (op == OP_EXP && !gas_enough) halt(ST_OUT_OF_GAS);
          else if (alu_done) begin r4 <= alu_y; state <= S_PUSH_R4; end
          else state <= S_ALU_WAIT;
        end
        S_ALU_WAIT: if (alu_done) begin r4 <= alu_y; state <= S_PUSH_R4; end
        S_PUSH_R4: state <= S_FETCH;
        S_SLOAD:   state <= S_FETCH;

        // 32-step shift-and-add squaring of the word count.
        S_MEMX: begin
          if (sq_cnt == 6'd32 && (op == OP_MSTORE || op == OP_MSTORE8)) r1 <= stk_top;
          if (sq_b[0]) sq_acc <= sq_acc + sq_a;
          sq_a   <= sq_a << 1;
          sq_b   <= sq_b >> 1;
          sq_cnt <= sq_cnt - 1'b1;
          if (sq_cnt == 6'd1) state <= S_MEMCHG;
        end

        S_MEMCHG: begin
          if (x_big && !x_none) halt(ST_CAPACITY);
          else if (!gas_enough) halt(ST_OUT_OF_GAS);
          else begin
            if (!x_none && x_w > msize_w) begin
              msize_w  <= x_w;
              mem_cost <= new_cost;
            end
            unique case (op)
              OP_MLOAD:             state <= S_MLOAD_RD;
              OP_MSTORE, OP_MSTORE8: state <= S_FETCH;
              OP_RETURN, OP_REVERT: begin cp <= '0; state <= S_RET_COPY; end
              OP_CODECOPY: begin
                cp <= '0;
                state <= (r2[31:0] == 0) ? S_FETCH : S_CODE_COPY;
              end
              OP_CREATE: begin
                kreg <= {rlp_enc, 424'b0};
                h_from_mem <= 1'b0;
                h_rem <= 32'(rlp_len);
                create2_k <= 1'b1;
                state <= S_HFEED;
              end
              default: begin      // KECCAK256, CREATE2: hash MEM[r3 .. r3+r2)
                h_from_mem <= 1'b1;
                h_ptr <= r3[31:0];
                h_rem <= r2[31:0];
                create2_k <= 1'b0;
                state <= (r2[31:0] == 0) ? S_HFIN : S_HLOAD;
              end
            endcase
          end
        end

        S_MLOAD_RD:   begin r1 <= mem_rdata; state <= S_MLOAD_PUSH; end
        S_MLOAD_PUSH: state <= S_FETCH;

        S_HLOAD: begin
          r5 <= mem_rdata;
          h_ptr <= h_ptr + 32;
          h_chunk <= 6'd32;
          state <= S_HFEED;
        end
        S_HFEED: if (kec_ready) begin
          if (h_from_mem) r5 <= r5 << 8;
          else kreg <= kreg << 8;
          h_rem <= h_rem - 1'b1;
          h_chunk <= h_chunk - 1'b1;
          if (h_rem == 1) state <= S_HFIN;
          else if (h_from_mem && h_chunk == 6'd1) state <= S_HLOAD;
        end
        S_HFIN: if (kec_ready) state <= S_HWAIT;
        S_HWAIT: if (kec_done) begin
          if (op == OP_CREATE2 && !create2_k) begin
            // r6 takes d while salt is popped into the delta register
            r6 <= kec_digest;
            kreg <= {8'hff, s_addr, stk_top, 256'b0};
            state <= S_DELTA;
          end else begin
            if (op != OP_KECCAK256) val_valid <= 1'b1;
            state <= S_FETCH;
          end
        end

        // delta: k = 0xff || sAddr || salt || d, d from r6
        S_DELTA: begin
          kreg[255:0] <= r6;
          h_from_mem <= 1'b0;
          h_rem <= 32'd85;
          create2_k <= 1'b1;
          state <= S_HFEED;
        end

        // CODECOPY: one byte per cycle from BCM (check port) into MEM
        S_CODE_COPY: begin
          cp <= cp + 1;
          if (cp + 1 == r2[31:0]) state <= S_FETCH;
        end

        S_RET_COPY: begin
          cp <= cp + 32;
          if (r2[31:0] == 0 || cp + 32 >= r2[31:0])
            halt(op == OP_RETURN ? ST_RETURNED : ST_REVERTED);
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The controller never drives the stack past its limits.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    !(stk_push && !stk_pop && stk_count == SPW'(STK_DEPTH)));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n)
    !(stk_pop && stk_count == '0));
endmodule
