// EVMx: a hardware Ethereum virtual machine that executes smart-contract
// bytecode in order, one opcode at a time, on a single clock.
//
// The host loads the bytecode byte by byte through bytcd (bytcd_we, _addr,
// _data), sets the environment words (init_data: ADDRESS, CALLER, CALLVALUE),
// the sender address and nonce used for CREATE/CREATE2 (s_addr, s_noc) and
// pulses 'start' with the gas limit on 'gval'. The processor clears the stack
// and memory, then runs until STOP, RETURN, REVERT, an exception or out of
// gas; 'done' pulses and 'status' tells which. Returned data is read back 32
// bytes at a time on retVal (ret_addr, ret_len); storage, which persists
// between runs, is read on oStore (ostore_key). 'val' is the value passed to
// a contract created with CREATE/CREATE2 and 'val_valid' pulses when its
// address has been pushed. 'op_fetch' pulses each time an opcode is
// dispatched and 'op_cur' names the opcode in execution, for tracing.
//
// Blocks and their connections follow the block diagram of EVMx: BCM and PC,
// the stack STK with pad and r0 on its input, r1-r4 and the ALU, MEM, STR,
// RTN, r5, KEC with ADR, r6, delta and RPL, the FSM and the gas counter GS.
// Sizes default to the published ones (32768-byte bytecode, 1024-word stack,
// 1024-entry storage, 2768-byte memory).
// Single clock, synchronous active-low reset. The reset, the status, gas,
// trace and retVal-address ports are this design's additions to the
// published interface (clk, start, gval, bytcd, initData, sAddr, sNoc,
// oStore, retVal, val).
module evmx_top
  import evmx_pkg::*;
#(
  parameter int unsigned BCM_DEPTH = 32768,
  parameter int unsigned STK_DEPTH = 1024,
  parameter int unsigned MEM_BYTES = 2768,
  parameter int unsigned STR_DEPTH = 1024,
  parameter int unsigned GW        = 64,
  parameter int unsigned NW        = 64,
  parameter int unsigned INIT_N    = 3,
  localparam int unsigned PC_W     = $clog2(BCM_DEPTH)
) (
  input  logic            clk,
  input  logic            rst_n,
  // bytecode load
  input  logic            bytcd_we,
  input  logic [PC_W-1:0] bytcd_addr,
  input  logic [7:0]      bytcd_data,
  // execution control
  input  logic            start,
  input  logic [GW-1:0]   gval,
  input  word_t           init_data [INIT_N],
  input  logic [159:0]    s_addr,
  input  logic [NW-1:0]   s_noc,
  output logic            busy,
  output logic            done,
  output status_e         status,
  output logic [GW-1:0]   gas_left,
  output logic            op_fetch,
  output logic [7:0]      op_cur,
  // results
  input  word_t           ostore_key,
  output word_t           o_store,
  input  logic [31:0]     ret_addr,
  output word_t           ret_val,
  output logic [31:0]     ret_len,
  output word_t           val,
  output logic            val_valid
);
  localparam int unsigned SPW = $clog2(STK_DEPTH) + 1;

  // BCM / PC
  logic [7:0]      bc_byte, chk_byte;
  logic [PC_W-1:0] chk_addr, pc, pc_load_val;
  logic            pc_clr, pc_inc, pc_load;
  logic [PC_W:0]   code_len;
  // STK
  word_t           stk_top, stk_rd, stk_push_data, stk_wr_data;
  logic [SPW-1:0]  stk_count;
  logic            stk_clr, stk_push, stk_pop, stk_wr_at, stk_fault;
  logic [4:0]      stk_wr_idx, stk_rd_idx;
  // MEM
  word_t           mem_rdata, mem_wdata;
  logic            mem_clr, mem_clr_busy, mem_wr;
  logic [31:0]     mem_oft;
  logic [5:0]      mem_sze;
  // STR
  word_t           str_rdata, str_key, str_wdata;
  logic            str_wr;
  // RTN
  logic            rtn_wr, rtn_set_len;
  logic [31:0]     rtn_addr, rtn_len;
  logic [5:0]      rtn_bytes;
  word_t           rtn_data;
  // GS
  logic            gas_enough, gas_load, gas_charge, out_of_gas;
  logic [GW-1:0]   gas_cost;
  // ALU
  logic            alu_start, alu_busy, alu_done;
  alu_op_e         alu_op;
  word_t           alu_a, alu_b, alu_c, alu_y;
  // KEC / RPL
  logic            kec_init, kec_valid, kec_finish, kec_ready, kec_done;
  logic [7:0]      kec_byte;
  logic [255:0]    kec_digest, rlp_enc;
  logic [5:0]      rlp_len;

  evmx_bcm #(.DEPTH(BCM_DEPTH)) u_bcm (
    .clk, .wr_en(bytcd_we), .wr_addr(bytcd_addr), .wr_data(bytcd_data),
    .rd_addr(pc), .rd_data(bc_byte), .chk_addr, .chk_data(chk_byte), .code_len);

  evmx_pc #(.AW(PC_W)) u_pc (
    .clk, .rst_n, .clr(pc_clr), .inc(pc_inc), .load(pc_load), .load_val(pc_load_val), .pc);

  evmx_stack #(.DEPTH(STK_DEPTH)) u_stk (
    .clk, .rst_n, .clr(stk_clr), .push(stk_push), .push_data(stk_push_data), .pop(stk_pop),
    .wr_at(stk_wr_at), .wr_idx(stk_wr_idx), .wr_data(stk_wr_data), .rd_idx(stk_rd_idx),
    .rd_data(stk_rd), .top(stk_top), .count(stk_count), .fault(stk_fault));

  evmx_mem #(.BYTES(MEM_BYTES)) u_mem (
    .clk, .rst_n, .clr(mem_clr), .clr_busy(mem_clr_busy), .oft(mem_oft), .wr_en(mem_wr),
    .sze(mem_sze), .wdata(mem_wdata), .rdata(mem_rdata));

  evmx_storage #(.DEPTH(STR_DEPTH)) u_str (
    .clk, .wr_en(str_wr), .key(str_key), .wdata(str_wdata), .rdata(str_rdata),
    .host_key(ostore_key), .host_rdata(o_store));

  evmx_rtn #(.BYTES(MEM_BYTES)) u_rtn (
    .clk, .rst_n, .wr_en(rtn_wr), .wr_addr(rtn_addr), .wr_bytes(rtn_bytes), .wr_data(rtn_data),
    .set_len(rtn_set_len), .len_in(rtn_len), .len(ret_len), .rd_addr(ret_addr), .rd_data(ret_val));

  evmx_gas #(.GW(GW)) u_gs (
    .clk, .rst_n, .load(gas_load), .gval, .charge(gas_charge), .cost(gas_cost),
    .enough(gas_enough), .gas_left, .out_of_gas);

  evmx_alu u_alu (
    .clk, .rst_n, .start(alu_start), .op(alu_op), .a(alu_a), .b(alu_b), .c(alu_c),
    .busy(alu_busy), .done(alu_done), .y(alu_y));

  evmx_keccak u_kec (
    .clk, .rst_n, .init(kec_init), .in_valid(kec_valid), .in_byte(kec_byte),
    .finish(kec_finish), .ready(kec_ready), .done(kec_done), .digest(kec_digest));

  evmx_rlp #(.NW(NW)) u_rpl (.s_addr, .s_noc, .enc(rlp_enc), .len(rlp_len));

  evmx_fsm #(
    .MEM_BYTES(MEM_BYTES), .STK_DEPTH(STK_DEPTH), .PC_W(PC_W), .GW(GW), .INIT_N(INIT_N)
  ) u_fsm (
    .clk, .rst_n, .start, .busy, .done, .status, .op_fetch, .op_cur, .init_data, .s_addr,
    .val, .val_valid,
    .bc_byte, .chk_byte, .chk_addr, .pc, .pc_clr, .pc_inc, .pc_load, .pc_load_val,
    .stk_top, .stk_rd, .stk_count, .stk_clr, .stk_push, .stk_push_data, .stk_pop,
    .stk_wr_at, .stk_wr_idx, .stk_wr_data, .stk_rd_idx,
    .mem_rdata, .mem_clr_busy, .mem_clr, .mem_oft, .mem_wr, .mem_sze, .mem_wdata,
    .str_rdata, .str_wr, .str_key, .str_wdata,
    .rtn_wr, .rtn_addr, .rtn_bytes, .rtn_data, .rtn_set_len, .rtn_len,
    .gas_enough, .gas_left, .gas_load, .gas_charge, .gas_cost, .code_len,
    .alu_done, .alu_y, .alu_start, .alu_op, .alu_a, .alu_b, .alu_c,
    .kec_ready, .kec_done, .kec_digest, .kec_init, .kec_valid, .kec_byte, .kec_finish,
    .rlp_enc, .rlp_len);

  // The controller checks stack depth before it acts, and the ALU is idle
  // whenever a new operation starts.
  a_stack_ok: assert property (@(posedge clk) disable iff (!rst_n) !stk_fault);
  a_alu_free: assert property (@(posedge clk) disable iff (!rst_n) !(alu_start && alu_busy));
endmodule
