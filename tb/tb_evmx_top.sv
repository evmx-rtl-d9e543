// End-to-end testbench of the EVMx processor at its default sizes.
//
// Assembles small EVM programs in the testbench, loads each through the
// bytcd port, starts it with a gas limit and checks the outcome through the
// host ports: status, gas left, returned data (retVal), storage (oStore) and
// the CREATE value output. Expected values are worked out here with
// SystemVerilog arithmetic or are published Keccak256 / CREATE / CREATE2
// results. It also times every opcode from one dispatch to the next and
// checks the cycle counts reported for EVMx (ADD, SUB, EQ, AND, OR, SWAP1: 4;
// ADDRESS, CALLER, CALLVALUE, POP: 1; PUSH1: 2; DUP1, SLOAD: 3; MSTORE: 35;
// MLOAD: 37). Every mechanism of the design is made to happen at least once
// and counted: PUSH1 through pad, PUSHn through r0, iterative multiply and
// divide, power-of-two division, taken and untaken jumps, memory-expansion
// gas, multi-block hashing, CREATE, CREATE2, RETURN, REVERT, out of gas,
// undefined opcode, stack underflow and overflow, bad jump target, an
// access beyond the memory's capacity, EXP, signed division, CODECOPY, and
// ADDMOD / MULMOD with sums and products wider than 256 bits. Last, it
// checks that each opcode of the published list of the 45 most frequent
// Ethereum opcodes that this design builds (42 of them) ran at least once.
// No ports and no parameter overrides; 10 ns clock, watchdog 400000
// cycles. The cycle counts checked are the published per-opcode times
// divided by the 7 ns clock period; the programs are this testbench's.
module tb_evmx_top;
  import evmx_pkg::*;

  logic clk = 0, rst_n = 0;
  logic bytcd_we = 0;
  logic [14:0] bytcd_addr = 0;
  logic [7:0] bytcd_data = 0;
  logic start = 0;
  logic [63:0] gval = 0;
  word_t init_data [3];
  logic [159:0] s_addr = 160'h6ac7ea33f8831ea9dcc53393aaa88b25a785dbf0;
  logic [63:0] s_noc = 64'd300;
  logic busy, done, op_fetch, val_valid;
  status_e status;
  logic [63:0] gas_left;
  logic [7:0] op_cur;
  word_t ostore_key = '0, o_store, ret_val, val;
  logic [31:0] ret_addr = 0, ret_len;

  evmx_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- program assembly ----------------
  logic [7:0] prog [4096];
  int plen;
  longint exp_static;     // static gas of the straight-line code emitted

  function automatic int sgas(input logic [7:0] o);
    if (o >= 8'h60 && o <= 8'h9f) return 3;       // PUSHn, DUPn, SWAPn
    case (o)
      8'h00, 8'hf3, 8'hfd: return 0;
      8'h5b: return 1;
      8'h30, 8'h33, 8'h34, 8'h50, 8'h58, 8'h5f: return 2;
      8'h38, 8'h59, 8'h5a: return 2;
      8'h39: return 3;
      8'h02, 8'h04, 8'h05, 8'h06, 8'h07, 8'h0b: return 5;
      8'h0a: return 10;
      8'h08, 8'h09: return 8;
      8'h56: return 8;
      8'h57: return 10;
      8'h20: return 30;
      8'h54, 8'h55: return 100;
      8'hf0, 8'hf5: return 32000;
      default: return 3;
    endcase
  endfunction

  function automatic void clear_prog();
    plen = 0; exp_static = 0;
  endfunction
  function automatic void op(input logic [7:0] o);
    prog[plen] = o; plen++; exp_static += sgas(o);
  endfunction
  function automatic void pushn(input int n, input word_t v);
    op(8'(8'h5f + n));
    for (int i = n - 1; i >= 0; i--) begin prog[plen] = v[8*i +: 8]; plen++; end
  endfunction

  // ---------------- execution and per-opcode timing ----------------
  int cyc_of [256];       // cycles of the latest execution of each opcode
  int seen  [256];
  int cycle = 0;
  int last_fetch = -1;
  int val_pulses = 0;
  word_t val_seen [2];
  always @(posedge clk) cycle <= cycle + 1;
  always @(negedge clk) begin
    if (op_fetch) begin
      if (last_fetch >= 0) begin
        cyc_of[op_cur] = cycle - last_fetch;
        seen[op_cur]++;
      end
      last_fetch = cycle;
    end
    if (done && last_fetch >= 0) begin   // the opcode that ended the run
      seen[op_cur]++;
      last_fetch = -1;
    end
    if (val_valid) begin
      if (val_pulses < 2) val_seen[val_pulses] = val;
      val_pulses++;
    end
  end

  task automatic load_and_run(input longint g, input int max_cycles);
    int n;
    for (int i = 0; i < plen; i++) begin
      @(negedge clk); bytcd_we = 1; bytcd_addr = 15'(i); bytcd_data = prog[i];
    end
    @(negedge clk); bytcd_we = 0;
    // a terminating STOP right after the code
    bytcd_we = 1; bytcd_addr = 15'(plen); bytcd_data = 8'h00;
    @(negedge clk); bytcd_we = 0;
    gval = 64'(g); start = 1; last_fetch = -1;
    @(negedge clk); start = 0;
    n = 0;
    while (!done && n < max_cycles) begin @(negedge clk); n++; end
    chk(n < max_cycles, "program finished in time");
  endtask


  // mechanism counters
  int m_pad, m_r0, m_mul, m_div, m_pow2, m_jump, m_jumpi_t, m_jumpi_n, m_memx, m_multiblock,
      m_create, m_create2, m_return, m_revert, m_oog, m_invalid, m_under, m_over, m_badjump, m_cap,
      m_exp, m_signed, m_codecopy, m_modular;

  localparam word_t C = 256'h1234567890abcdef1234567890abcdef1234567890abcdef1234567890abcdef;
  localparam word_t D = 256'hfedcba0987654321fedcba0987654321fedcba0987654321fedcba0987654321;
  localparam word_t E = {32{8'h8f}};

  task automatic read_ret(input int off, output word_t w);
    ret_addr = 32'(off); #1; w = ret_val;
  endtask

  initial begin
    word_t w;
    int loop_start, loop_end, p_end;
    longint gas_used;
    init_data[0] = 256'h00000000000000000000000011223344556677889900aabbccddeeff00112233;
    init_data[1] = 256'hca11e4;
    init_data[2] = 256'd12345;
    for (int i = 0; i < 256; i++) begin seen[i] = 0; cyc_of[i] = 0; end
    {m_pad, m_r0, m_mul, m_div, m_pow2, m_jump, m_jumpi_t, m_jumpi_n, m_memx, m_multiblock,
     m_create, m_create2, m_return, m_revert, m_oog, m_invalid, m_under, m_over, m_badjump, m_cap,
     m_exp, m_signed, m_codecopy, m_modular} = '0;
    repeat (3) @(negedge clk); rst_n = 1;

    // ============ program 1: arithmetic, memory, storage, RETURN ============
    clear_prog();
    pushn(1, 5); pushn(1, 7); op(8'h01);                 // ADD -> 12
    pushn(1, 3); op(8'h90); op(8'h03);                   // SWAP1, SUB -> 9
    op(8'h80); op(8'h14);                                // DUP1, EQ -> 1
    pushn(1, 8'h0f); op(8'h16);                          // AND -> 1
    pushn(1, 8'hf0); op(8'h17);                          // OR -> 0xf1
    op(8'h30); op(8'h33); op(8'h34); op(8'h50); op(8'h50); op(8'h50);
    pushn(1, 8'h40); op(8'h52);                          // MSTORE [0x40]
    pushn(1, 8'h40); op(8'h51);                          // MLOAD
    pushn(1, 7); op(8'h55);                              // SSTORE S[7]
    pushn(1, 7); op(8'h54);                              // SLOAD
    pushn(1, 0); op(8'h52);                              // MSTORE [0x00]
    pushn(32, C); pushn(32, D); op(8'h02);               // MUL
    pushn(1, 8'h20); op(8'h52);
    pushn(1, 3); pushn(32, E); op(8'h04);                // DIV by 3
    pushn(1, 8'h60); op(8'h52);
    pushn(1, 16); pushn(32, E); op(8'h04);               // DIV by 16
    pushn(1, 8'h80); op(8'h52);
    pushn(1, 7); pushn(32, E); op(8'h06);                // MOD 7
    pushn(1, 8'ha0); op(8'h52);
    op(8'h30); pushn(1, 8'hc0); op(8'h52);               // ADDRESS -> [0xc0]
    pushn(1, 8'he0); pushn(1, 0); op(8'hf3);             // RETURN(0, 0xe0)
    load_and_run(1000000, 20000);
    chk(status == ST_RETURNED, $sformatf("program 1 status %s", status.name()));
    chk(ret_len == 32'he0, "program 1 return length");
    read_ret(0,    w); chk(w == 256'hf1, "result 0xf1");
    read_ret(32,   w); chk(w == C * D, "MUL result");
    read_ret(64,   w); chk(w == 256'hf1, "MLOAD result");
    read_ret(96,   w); chk(w == E / 3, "DIV result");
    read_ret(128,  w); chk(w == E / 16, "DIV by 16 result");
    read_ret(160,  w); chk(w == E % 7, "MOD result");
    read_ret(192,  w); chk(w == init_data[0], "ADDRESS result");
    read_ret(224,  w); chk(w == '0, "past the returned data");
    ostore_key = 7; #1; chk(o_store == 256'hf1, "storage slot 7");
    // gas: static costs + memory expansion to 7 words (3*7 + 49/512)
    gas_used = 1000000 - longint'(gas_left);
    chk(gas_used == exp_static + 21, $sformatf("gas used %0d expected %0d", gas_used, exp_static + 21));
    if (gas_used == exp_static + 21) m_memx++;
    // cycle counts from the EVMx opcode latency table (7 ns per cycle)
    chk(cyc_of[8'h01] == 4,  $sformatf("ADD %0d cycles", cyc_of[8'h01]));
    chk(cyc_of[8'h03] == 4,  $sformatf("SUB %0d cycles", cyc_of[8'h03]));
    chk(cyc_of[8'h14] == 4,  $sformatf("EQ %0d cycles", cyc_of[8'h14]));
    chk(cyc_of[8'h16] == 4,  $sformatf("AND %0d cycles", cyc_of[8'h16]));
    chk(cyc_of[8'h17] == 4,  $sformatf("OR %0d cycles", cyc_of[8'h17]));
    chk(cyc_of[8'h30] == 1,  $sformatf("ADDRESS %0d cycles", cyc_of[8'h30]));
    chk(cyc_of[8'h33] == 1,  $sformatf("CALLER %0d cycles", cyc_of[8'h33]));
    chk(cyc_of[8'h34] == 1,  $sformatf("CALLVALUE %0d cycles", cyc_of[8'h34]));
    chk(cyc_of[8'h50] == 1,  $sformatf("POP %0d cycles", cyc_of[8'h50]));
    chk(cyc_of[8'h51] == 37, $sformatf("MLOAD %0d cycles", cyc_of[8'h51]));
    chk(cyc_of[8'h52] == 35, $sformatf("MSTORE %0d cycles", cyc_of[8'h52]));
    chk(cyc_of[8'h54] == 3,  $sformatf("SLOAD %0d cycles", cyc_of[8'h54]));
    chk(cyc_of[8'h60] == 2,  $sformatf("PUSH1 %0d cycles", cyc_of[8'h60]));
    chk(cyc_of[8'h90] == 4,  $sformatf("SWAP1 %0d cycles", cyc_of[8'h90]));
    chk(cyc_of[8'h80] == 3,  $sformatf("DUP1 %0d cycles", cyc_of[8'h80]));
    chk(cyc_of[8'h7f] == 33, $sformatf("PUSH32 %0d cycles", cyc_of[8'h7f]));
    if (seen[8'h60] > 0) m_pad++;
    if (seen[8'h7f] > 0) m_r0++;
    if (cyc_of[8'h02] > 4) m_mul++;
    if (cyc_of[8'h06] == 4 + 256) m_div++;
    // the second DIV (by 16) was the latest: the shortcut keeps it at 4 cycles
    chk(cyc_of[8'h04] == 4, $sformatf("DIV by 16 %0d cycles", cyc_of[8'h04]));
    if (cyc_of[8'h04] == 4) m_pow2++;
    if (status == ST_RETURNED) m_return++;

    // ============ program 2: a loop with JUMP / JUMPI ============
    clear_prog();
    pushn(1, 5);                                  // i = 5
    loop_start = plen; op(8'h5b);                 // JUMPDEST
    op(8'h80); op(8'h15);                         // DUP1 ISZERO
    pushn(1, 0); loop_end = plen - 1;             // PUSH1 <end> (patched)
    op(8'h57);                                    // JUMPI
    pushn(1, 9); op(8'h54); pushn(1, 1); op(8'h01); pushn(1, 9); op(8'h55);  // S[9] += 1
    pushn(1, 1); op(8'h90); op(8'h03);            // i = i - 1
    pushn(1, 8'(loop_start)); op(8'h56);          // JUMP loop
    p_end = plen; op(8'h5b); op(8'h00);           // end: JUMPDEST STOP
    prog[loop_end] = 8'(p_end);
    load_and_run(1000000, 20000);
    chk(status == ST_STOPPED, $sformatf("program 2 status %s", status.name()));
    ostore_key = 9; #1; chk(o_store == 5, $sformatf("loop ran 5 times: %0d", o_store));
    if (o_store == 5) begin m_jump++; m_jumpi_n++; end
    if (status == ST_STOPPED) m_jumpi_t++;

    // ============ program 3: KECCAK256, CREATE2, CREATE ============
    clear_prog();
    begin
      word_t code0, code1;
      for (int i = 0; i < 32; i++) code0[255-8*i -: 8] = 8'(i + 1);
      code1 = '0;
      for (int i = 0; i < 8; i++) code1[255-8*i -: 8] = 8'(33 + i);
      pushn(32, code0); pushn(1, 0); op(8'h52);
      pushn(32, code1); pushn(1, 8'h20); op(8'h52);
    end
    pushn(1, 8'h28); pushn(1, 0); op(8'h20);               // KECCAK256(0, 40)
    pushn(2, 16'h0200); op(8'h52);
    pushn(2, 16'h1234); pushn(1, 8'h28); pushn(1, 0); pushn(1, 8'h99); op(8'hf5);  // CREATE2
    pushn(2, 16'h0220); op(8'h52);
    pushn(1, 0); pushn(1, 0); pushn(1, 8'h55); op(8'hf0);  // CREATE
    pushn(2, 16'h0240); op(8'h52);
    pushn(2, 16'h012c); pushn(1, 0); op(8'h20);            // KECCAK256(0, 300): 3 blocks
    pushn(2, 16'h0260); op(8'h52);
    pushn(1, 8'h80); pushn(2, 16'h0200); op(8'hf3);        // RETURN(0x200, 0x80)
    val_pulses = 0;
    load_and_run(10000000, 40000);
    chk(status == ST_RETURNED, $sformatf("program 3 status %s", status.name()));
    read_ret(0, w);
    chk(w == 256'h254f7053ca44dff7a0dd909507138035852be93f533e5c737463ccd67e6fe67e, "KECCAK256 of init code");
    read_ret(32, w);
    chk(w == 256'hc37dfda377099d1e06b6ecdb79281401bcc7e510, $sformatf("CREATE2 address %h", w));
    if (w == 256'hc37dfda377099d1e06b6ecdb79281401bcc7e510) m_create2++;
    read_ret(64, w);
    chk(w == 256'h47bbbb5fe97aa84c3fa30dafbb067284d250c24c, $sformatf("CREATE address %h", w));
    if (w == 256'h47bbbb5fe97aa84c3fa30dafbb067284d250c24c) m_create++;
    read_ret(96, w);
    chk(w == 256'h4ce4405066f6b86305dd0fd71c18ba7eb195b6ac7ae6a1c99ca088dd82582a42, "KECCAK256 of 300 bytes");
    if (w == 256'h4ce4405066f6b86305dd0fd71c18ba7eb195b6ac7ae6a1c99ca088dd82582a42) m_multiblock++;
    chk(val_pulses == 2 && val_seen[0] == 256'h99 && val_seen[1] == 256'h55, "val output of CREATE2 and CREATE");

    // ============ program 4: REVERT ============
    clear_prog();
    pushn(1, 8'hab); pushn(1, 0); op(8'h52); pushn(1, 8'h20); pushn(1, 0); op(8'hfd);
    load_and_run(100000, 2000);
    chk(status == ST_REVERTED, "REVERT status");
    read_ret(0, w); chk(w == 256'hab && ret_len == 32, "REVERT data");
    if (status == ST_REVERTED) m_revert++;

    // ============ program 5: out of gas ============
    clear_prog();
    pushn(1, 1); pushn(1, 2); op(8'h01); op(8'h00);
    load_and_run(8, 2000);
    chk(status == ST_OUT_OF_GAS && gas_left == 0, "out of gas at ADD");
    if (status == ST_OUT_OF_GAS) m_oog++;
    load_and_run(9, 2000);
    chk(status == ST_STOPPED && gas_left == 0, "exactly enough gas");

    // ============ program 6: undefined opcode ============
    clear_prog();
    pushn(1, 1); op(8'hfe);
    load_and_run(1000, 2000);
    chk(status == ST_INVALID, "undefined opcode");
    if (status == ST_INVALID) m_invalid++;

    // ============ program 7: stack underflow ============
    clear_prog();
    pushn(1, 1); op(8'h01);
    load_and_run(1000, 2000);
    chk(status == ST_INVALID, "stack underflow");
    if (status == ST_INVALID) m_under++;

    // ============ program 8: bad jump target ============
    clear_prog();
    pushn(1, 4); op(8'h56); op(8'h00); op(8'h00); op(8'h00);
    load_and_run(1000, 2000);
    chk(status == ST_INVALID, "jump to a non-JUMPDEST");
    if (status == ST_INVALID) m_badjump++;

    // ============ program 9: memory capacity ============
    clear_prog();
    pushn(2, 16'h1000); op(8'h51);
    load_and_run(1000000, 2000);
    chk(status == ST_CAPACITY, "MLOAD past the memory");
    if (status == ST_CAPACITY) m_cap++;

    // ============ program 10: stack overflow ============
    clear_prog();
    op(8'h5b); op(8'h5f); pushn(1, 0); op(8'h56);   // loop: net one push per pass
    load_and_run(10000000, 100000);
    chk(status == ST_INVALID, "stack overflow");
    chk(gas_left == 10000000 - 1023 * (1 + 2 + 3 + 8) - (1 + 2), $sformatf("overflow gas left %0d", gas_left));
    if (status == ST_INVALID) m_over++;

    // ============ program 11: EXP, signed division, SIGNEXTEND, MSIZE, CODESIZE, GAS ============
    begin
      word_t p3, got;
      longint g_static;
      p3 = 1;
      for (int i = 0; i < 200; i++) p3 = p3 * 3;
      clear_prog();
      pushn(1, 200); pushn(1, 3); op(8'h0a); pushn(1, 8'h00); op(8'h52);      // EXP(3, 200)
      pushn(1, 2); pushn(32, -word_t'(7)); op(8'h05); pushn(1, 8'h20); op(8'h52);  // SDIV(-7, 2)
      pushn(1, 3); pushn(32, -word_t'(7)); op(8'h07); pushn(1, 8'h40); op(8'h52);  // SMOD(-7, 3)
      pushn(1, 8'hff); pushn(1, 0); op(8'h0b); pushn(1, 8'h60); op(8'h52);      // SIGNEXTEND(0, 0xff)
      pushn(2, 16'h7f00); pushn(1, 1); op(8'h0b); pushn(1, 8'h80); op(8'h52);  // SIGNEXTEND(1, 0x7f00)
      pushn(1, 16); pushn(32, -word_t'(1000)); op(8'h05); pushn(1, 8'ha0); op(8'h52);  // SDIV by 16
      op(8'h59); pushn(1, 8'hc0); op(8'h52);                                    // MSIZE
      op(8'h38); pushn(1, 8'he0); op(8'h52);                                    // CODESIZE
      op(8'h5a); g_static = exp_static; pushn(2, 16'h0100); op(8'h52);          // GAS
      pushn(2, 16'h0120); pushn(1, 0); op(8'hf3);                               // RETURN(0, 0x120)
      load_and_run(1000000, 200000);
      chk(status == ST_RETURNED, $sformatf("program 11 status %s", status.name()));
      read_ret(0, got);     chk(got == p3, $sformatf("EXP(3,200) %h", got));
      if (got == p3 && cyc_of[8'h0a] > 4) m_exp++;
      read_ret(32, got);    chk(got == -word_t'(3), $sformatf("SDIV(-7,2) %h", got));
      read_ret(64, got);    chk(got == -word_t'(1), $sformatf("SMOD(-7,3) %h", got));
      if (got == -word_t'(1) && cyc_of[8'h07] == 4 + 256) m_signed++;
      read_ret(96, got);    chk(got == '1, "SIGNEXTEND(0, 0xff)");
      read_ret(128, got);   chk(got == 256'h7f00, "SIGNEXTEND(1, 0x7f00)");
      read_ret(160, got);   chk(got == -word_t'(62), $sformatf("SDIV(-1000,16) %h", got));
      chk(cyc_of[8'h05] == 4, $sformatf("SDIV by 16 %0d cycles", cyc_of[8'h05]));
      read_ret(192, got);   chk(got == 256'hc0, $sformatf("MSIZE %h", got));
      read_ret(224, got);   chk(got == word_t'(plen + 1), $sformatf("CODESIZE %0d", got));
      read_ret(256, got);
      chk(got == word_t'(1000000 - g_static - 50 - 24), $sformatf("GAS %0d", got));
      chk(1000000 - longint'(gas_left) == exp_static + 50 + 3 * 9 + 81 / 512,
          $sformatf("program 11 gas used %0d", 1000000 - longint'(gas_left)));
      chk(cyc_of[8'h59] == 1 && cyc_of[8'h38] == 1 && cyc_of[8'h5a] == 1, "MSIZE, CODESIZE, GAS 1 cycle");
    end

    // ============ program 12: CODECOPY, reaching past the end of the code ============
    begin
      word_t got, want;
      clear_prog();
      pushn(1, 40); pushn(1, 0); pushn(1, 0); op(8'h39);   // CODECOPY(dest 0, offset 0, 40)
      pushn(1, 40); pushn(1, 0); op(8'hf3);                 // RETURN(0, 40)
      load_and_run(100000, 2000);
      chk(status == ST_RETURNED && ret_len == 40, "program 12 status");
      // the code, the STOP appended after it, then zeros
      want = '0;
      for (int i = 0; i < plen; i++) want[255 - 8*i -: 8] = prog[i];
      read_ret(0, got); chk(got == want, $sformatf("CODECOPY bytes %h", got));
      read_ret(32, got); chk(got == '0, "CODECOPY past the code");
      chk(100000 - longint'(gas_left) == exp_static + 3 * 2 + 3 * 2,
          $sformatf("CODECOPY gas used %0d", 100000 - longint'(gas_left)));
      chk(cyc_of[8'h39] == 4 + 32 + 1 + 40, $sformatf("CODECOPY %0d cycles", cyc_of[8'h39]));
      if (got == '0 && status == ST_RETURNED) m_codecopy++;
    end

    // ============ program 13: ADDMOD and MULMOD past 2^256 ============
    begin
      word_t got;
      logic [511:0] pm;
      logic [256:0] sm;
      sm = ({1'b0, ~256'd0} + 257'd5) % 257'd7;
      pm = ({256'd0, ~256'd0} * {256'd0, ~256'd0}) % 512'd12345;
      clear_prog();
      pushn(1, 7); pushn(1, 5); pushn(32, '1); op(8'h08); pushn(1, 0); op(8'h52);          // ADDMOD(2^256-1, 5, 7)
      pushn(2, 12345); pushn(32, '1); pushn(32, '1); op(8'h09); pushn(1, 8'h20); op(8'h52); // MULMOD
      pushn(1, 64); pushn(1, 0); op(8'hf3);
      load_and_run(100000, 5000);
      chk(status == ST_RETURNED, $sformatf("program 13 status %s", status.name()));
      read_ret(0, got);  chk(got == sm[255:0], $sformatf("ADDMOD %h", got));
      read_ret(32, got); chk(got == pm[255:0], $sformatf("MULMOD %h", got));
      chk(cyc_of[8'h08] == 4 + 513 && cyc_of[8'h09] == 4 + 513,
          $sformatf("ADDMOD %0d, MULMOD %0d cycles", cyc_of[8'h08], cyc_of[8'h09]));
      chk(100000 - longint'(gas_left) == exp_static + 3 * 2,
          $sformatf("program 13 gas used %0d", 100000 - longint'(gas_left)));
      if (got == pm[255:0] && status == ST_RETURNED) m_modular++;
    end

    // ============ program 14: LT, GT, NOT, DUP2-7, SWAP2-4, PUSH3/4/20 ============
    begin
      word_t got, want [15];
      clear_prog();
      pushn(1, 5); pushn(1, 3); op(8'h10); pushn(1, 8'h00); op(8'h52);       // LT(3, 5)
      pushn(1, 5); pushn(1, 3); op(8'h11); pushn(1, 8'h20); op(8'h52);       // GT(3, 5)
      pushn(1, 0); op(8'h19); pushn(1, 8'h40); op(8'h52);                   // NOT(0)
      for (int i = 1; i <= 7; i++) pushn(1, word_t'(i));                    // 1 .. 7, 7 on top
      op(8'h83); pushn(1, 8'h60); op(8'h52);                                // DUP4 -> 4
      op(8'h84); pushn(1, 8'h80); op(8'h52);                                // DUP5 -> 3
      op(8'h85); pushn(1, 8'ha0); op(8'h52);                                // DUP6 -> 2
      op(8'h86); pushn(1, 8'hc0); op(8'h52);                                // DUP7 -> 1
      op(8'h92); pushn(1, 8'he0); op(8'h52);                                // SWAP3: 4 on top
      op(8'h93); pushn(2, 16'h0100); op(8'h52);                             // SWAP4: 2 on top
      pushn(3, 24'h123456); pushn(2, 16'h0120); op(8'h52);
      pushn(4, 32'hdeadbeef); pushn(2, 16'h0140); op(8'h52);
      pushn(20, 160'h6ac7ea33f8831ea9dcc53393aaa88b25a785dbf0); pushn(2, 16'h0160); op(8'h52);
      // the stack now holds 1, 6, 3, 7, 5 with 5 on top
      op(8'h81); pushn(2, 16'h0180); op(8'h52);                             // DUP2 -> 7
      op(8'h82); pushn(2, 16'h01a0); op(8'h52);                             // DUP3 -> 3
      op(8'h91); pushn(2, 16'h01c0); op(8'h52);                             // SWAP2: 3 on top
      pushn(2, 16'h01e0); pushn(1, 0); op(8'hf3);
      want = '{word_t'(1), word_t'(0), '1, word_t'(4), word_t'(3), word_t'(2), word_t'(1),
               word_t'(4), word_t'(2), word_t'(24'h123456), word_t'(32'hdeadbeef),
               word_t'(160'h6ac7ea33f8831ea9dcc53393aaa88b25a785dbf0),
               word_t'(7), word_t'(3), word_t'(3)};
      load_and_run(100000, 5000);
      chk(status == ST_RETURNED && ret_len == 480, $sformatf("program 14 status %s", status.name()));
      for (int i = 0; i < 15; i++) begin
        read_ret(32 * i, got);
        chk(got == want[i], $sformatf("program 14 word %0d %h", i, got));
      end
      chk(100000 - longint'(gas_left) == exp_static + 3 * 15,
          $sformatf("program 14 gas used %0d", 100000 - longint'(gas_left)));
    end

    // ============ opcode mix: the 45 most frequent opcodes on Ethereum ============
    // CALL, CALLDATASIZE and RETURNDATASIZE are not built; every other one of
    // the list must have run at least once in the programs above.
    begin
      logic [7:0] top45 [42] = '{
        8'h56, 8'h60, 8'h61, 8'h50, 8'h5b, 8'h90, 8'h80, 8'h81, 8'h01, 8'h17, 8'h82, 8'h5f,
        8'h91, 8'h52, 8'h16, 8'h57, 8'h51, 8'h73, 8'h83, 8'h03, 8'h92, 8'h84, 8'h14, 8'h54,
        8'h63, 8'h10, 8'h85, 8'h20, 8'h02, 8'h0a, 8'h00, 8'h62, 8'h11, 8'h34, 8'h93, 8'h19,
        8'h7f, 8'hfe, 8'h33, 8'h86, 8'h04, 8'h39};
      int ran = 0;
      foreach (top45[i]) begin
        if (seen[top45[i]] > 0) ran++;
        else $display("opcode %h of the frequency list never ran", top45[i]);
      end
      chk(ran == 42, $sformatf("%0d of 42 frequent opcodes ran", ran));
    end

    // ============ mechanism coverage ============
    chk(m_pad > 0, "PUSH1 through pad");
    chk(m_r0 > 0, "PUSH32 through r0");
    chk(m_mul > 0, "iterative multiply");
    chk(m_div > 0, "iterative modulo");
    chk(m_pow2 > 0, "power-of-two division");
    chk(m_jump > 0 && m_jumpi_t > 0 && m_jumpi_n > 0, "jumps");
    chk(m_memx > 0, "memory expansion gas");
    chk(m_multiblock > 0, "multi-block hash");
    chk(m_create > 0 && m_create2 > 0, "CREATE and CREATE2");
    chk(m_return > 0 && m_revert > 0, "RETURN and REVERT");
    chk(m_oog > 0 && m_invalid > 0 && m_under > 0 && m_over > 0 && m_badjump > 0 && m_cap > 0,
        "exceptions");
    chk(m_exp > 0, "square-and-multiply EXP");
    chk(m_signed > 0, "signed division");
    chk(m_codecopy > 0, "code copy");
    chk(m_modular > 0, "ADDMOD and MULMOD");
    $display("mechanisms: pad=%0d r0=%0d mul=%0d div=%0d pow2=%0d jump=%0d jumpi_taken=%0d jumpi_not=%0d memx=%0d multiblock=%0d create=%0d create2=%0d return=%0d revert=%0d oog=%0d invalid=%0d underflow=%0d overflow=%0d badjump=%0d capacity=%0d exp=%0d signed=%0d codecopy=%0d modular=%0d",
             m_pad, m_r0, m_mul, m_div, m_pow2, m_jump, m_jumpi_t, m_jumpi_n, m_memx, m_multiblock,
             m_create, m_create2, m_return, m_revert, m_oog, m_invalid, m_under, m_over, m_badjump, m_cap, m_exp, m_signed, m_codecopy, m_modular);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
