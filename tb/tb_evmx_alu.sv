// Self-checking testbench of the 256-bit ALU. Every operation is applied to
// random and corner-case operands (zero, one, all ones, powers of two, sign
// bit set) and the result is compared with the same operation written with
// SystemVerilog's own operators. Also checks that single-cycle operations
// finish in their start cycle, that a non-power-of-two division takes 256
// cycles, and that division by a power of two finishes in the start cycle.
// The signed division reference uses SystemVerilog's signed operators, and
// the EXP reference a left-to-right power loop written with '*', and the
// ADDMOD / MULMOD references use 257- and 512-bit arithmetic. Also checks
// that ADDMOD takes 513 cycles and MULMOD 513.
// No ports; 10 ns clock, a watchdog ends the run after 3000000 cycles. The
// algorithms under test follow the paper; the latencies checked are this
// design's (the paper gives no ALU latency).
module tb_evmx_alu;
  import evmx_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start = 0, busy, done;
  alu_op_e op = ALU_ADD;
  word_t a = '0, b = '0, c = '0, y;
  int checks = 0, failures = 0;

  evmx_alu dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic word_t model(alu_op_e o, word_t x, word_t z, word_t m);
    unique case (o)
      ALU_ADD: return x + z;
      ALU_SUB: return x - z;
      ALU_MUL: return x * z;
      ALU_DIV: return (z == 0) ? '0 : x / z;
      ALU_MOD: return (z == 0) ? '0 : x % z;
      ALU_LT:  return (x < z) ? 1 : 0;
      ALU_GT:  return (x > z) ? 1 : 0;
      ALU_SLT: return ($signed(x) < $signed(z)) ? 1 : 0;
      ALU_SGT: return ($signed(x) > $signed(z)) ? 1 : 0;
      ALU_EQ:  return (x == z) ? 1 : 0;
      ALU_ISZERO: return (x == 0) ? 1 : 0;
      ALU_AND: return x & z;
      ALU_OR:  return x | z;
      ALU_XOR: return x ^ z;
      ALU_NOT: return ~x;
      ALU_BYTE: return (x >= 32) ? '0 : (z >> (8 * (31 - x))) & 256'hff;
      ALU_SHL: return (x >= 256) ? '0 : z << x;
      ALU_SHR: return (x >= 256) ? '0 : z >> x;
      ALU_SAR: return (x >= 256) ? (z[255] ? '1 : '0) : word_t'($signed(z) >>> x);
      ALU_SDIV: begin
        if (z == 0) return '0;
        if (x == (word_t'(1) << 255) && z == '1) return x;   // -2^255 / -1 wraps
        return word_t'($signed(x) / $signed(z));
      end
      ALU_SMOD: return (z == 0) ? '0 : word_t'($signed(x) % $signed(z));
      ALU_EXP: begin
        word_t r = 1;
        for (int i = 255; i >= 0; i--) begin
          r = r * r;
          if (z[i]) r = r * x;
        end
        return r;
      end
      ALU_SIGNEXT: begin
        word_t m;
        if (x >= 31) return z;
        m = (word_t'(1) << (8 * x + 8)) - 1;
        return z[8 * x + 7] ? (z | ~m) : (z & m);
      end
      ALU_ADDMOD: begin
        logic [256:0] s;
        if (m == 0) return '0;
        s = ({1'b0, x} + {1'b0, z}) % {1'b0, m};
        return s[255:0];
      end
      ALU_MULMOD: begin
        logic [511:0] p;
        if (m == 0) return '0;
        p = ({256'b0, x} * {256'b0, z}) % {256'b0, m};
        return p[255:0];
      end
      default: return '0;
    endcase
  endfunction

  function automatic word_t rnd();
    word_t v;
    int unsigned kind, sh, lowv;
    for (int i = 0; i < 8; i++) v[32*i +: 32] = $urandom;
    kind  = $urandom_range(0, 7);
    sh    = $urandom_range(0, 255);
    lowv = $urandom_range(0, 300);
    unique case (kind)
      0: v = '0;
      1: v = 1;
      2: v = '1;
      3: v = word_t'(1) << sh;
      4: v = v >> sh;
      5: v = word_t'(lowv);
      default: ;
    endcase
    return v;
  endfunction

  task automatic run(alu_op_e o, word_t x, word_t z, output int cyc, input word_t m = '0);
    @(negedge clk);
    op = o; a = x; b = z; c = m; start = 1;
    #1;
    cyc = 1;
    if (!done) begin
      @(negedge clk); start = 0;
      cyc = 2;
      while (!done) begin @(negedge clk); cyc++; end
    end
    checks++;
    if (y !== model(o, x, z, m)) begin
      failures++;
      $display("FAIL %s a=%h b=%h c=%h y=%h expected %h", o.name(), x, z, m, y, model(o, x, z, m));
    end
    @(negedge clk); start = 0;
  endtask

  initial begin
    int cyc;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 40; k++)
      for (int o = 0; o <= int'(ALU_MULMOD); o++) begin
        word_t x = rnd(), z = rnd(), m = rnd();
        // keep most exponents short so the run stays brief
        if (alu_op_e'(o) == ALU_EXP && k % 8 != 0) z = z & 256'hffff;
        if (alu_op_e'(o) == ALU_SIGNEXT && k % 2 == 0) x = x & 256'h1f;
        run(alu_op_e'(o), x, z, cyc, m);
      end
    // signed division corner cases
    run(ALU_SDIV, word_t'(1) << 255, '1, cyc);
    run(ALU_SDIV, -word_t'(7), word_t'(2), cyc);
    run(ALU_SMOD, -word_t'(7), word_t'(2), cyc);
    run(ALU_SMOD, word_t'(7), -word_t'(3), cyc);
    run(ALU_SDIV, -word_t'(1000), -word_t'(8), cyc);
    run(ALU_EXP, word_t'(2), word_t'(255), cyc);
    run(ALU_EXP, word_t'(3), word_t'(0), cyc);
    checks++; if (cyc != 1) begin failures++; $display("FAIL EXP by 0 took %0d cycles", cyc); end
    run(ALU_EXP, word_t'(0), word_t'(5), cyc);
    // modular corner cases: sum and product past 2^256, modulus 0 and 1
    run(ALU_ADDMOD, '1, '1, cyc, word_t'(12345));
    checks++; if (cyc != 513) begin failures++; $display("FAIL ADDMOD took %0d cycles", cyc); end
    run(ALU_MULMOD, '1, '1, cyc, word_t'(12345));
    checks++; if (cyc != 513) begin failures++; $display("FAIL MULMOD took %0d cycles", cyc); end
    run(ALU_MULMOD, '1, '1, cyc, '1 - 1);
    run(ALU_ADDMOD, word_t'(10), word_t'(10), cyc, word_t'(8));
    run(ALU_MULMOD, word_t'(10), word_t'(10), cyc, word_t'(8));
    run(ALU_ADDMOD, word_t'(3), word_t'(4), cyc, '0);
    checks++; if (cyc != 1) begin failures++; $display("FAIL ADDMOD by 0 took %0d cycles", cyc); end
    run(ALU_MULMOD, word_t'(3), word_t'(4), cyc, word_t'(1));
    // timing
    run(ALU_ADD, 5, 7, cyc);
    checks++; if (cyc != 1) begin failures++; $display("FAIL ADD took %0d cycles", cyc); end
    run(ALU_DIV, '1, 256'd3, cyc);
    checks++; if (cyc != 257) begin failures++; $display("FAIL DIV took %0d cycles", cyc); end
    run(ALU_DIV, '1, 256'd64, cyc);
    checks++; if (cyc != 1) begin failures++; $display("FAIL DIV by 64 took %0d cycles", cyc); end
    run(ALU_MOD, 256'd1000, 256'd7, cyc);
    run(ALU_MUL, 256'd12345, 256'd5, cyc);
    checks++; if (cyc != 4) begin failures++; $display("FAIL MUL by 5 took %0d cycles", cyc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
