// Arithmetic logic unit (ALU) of EVMx, 256-bit EVM semantics.
//
// 'a' is the first operand popped (top of stack), 'b' the second. Addition,
// subtraction, comparisons, logic, BYTE and shifts are combinational: 'done'
// rises in the cycle 'start' is high and 'y' holds the result. Multiplication
// uses shift-and-add, one multiplier bit per cycle, and stops as soon as the
// remaining multiplier bits are zero. Division and modulo use non-restoring
// division, one quotient bit per cycle (256 cycles). For those 'busy' is high
// from the cycle after 'start' until the cycle 'done' pulses with the result
// on 'y'. Division or modulo by zero gives zero (EVM rule). Division or modulo
// by a power of two is done in the start cycle as a right shift or a mask.
// SDIV and SMOD divide the magnitudes on the same divider and fix the signs
// afterwards (quotient negative when the signs differ, remainder takes the
// dividend's sign). EXP is square-and-multiply over the exponent bits, every
// product made on the shift-and-add multiplier, so its time grows with the
// exponent's bit length and the operands' bit patterns. SIGNEXTEND is
// combinational. ADDMOD and MULMOD take the modulus on 'c': both first
// reduce 'a' modulo c on the divider; ADDMOD then reduces 'b' the same way
// and adds with one conditional subtraction (512 cycles in all), MULMOD runs
// an interleaved modular multiplication, one bit of 'b' per cycle from the
// top: r = 2r mod c, then r = r + a mod c when the bit is set (512 cycles).
// The algorithms (shift-and-add, non-restoring, power-of-two shortcut) follow
// the paper; the interface, the early end of multiplication and the
// ADDMOD / MULMOD sequences are this design's choices.
module evmx_alu
  import evmx_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    start,
  input  alu_op_e op,
  input  word_t   a,
  input  word_t   b,
  input  word_t   c,      // modulus of ADDMOD / MULMOD
  output logic    busy,
  output logic    done,
  output word_t   y
);
  typedef enum logic [2:0] {S_IDLE, S_MUL, S_DIV, S_EXP, S_MM} state_e;
  // what follows a division: nothing, ADDMOD's second reduction or its sum,
  // MULMOD's interleaved multiplication
  typedef enum logic [1:0] {P_NONE, P_ADD1, P_ADD2, P_MUL1} post_e;
  post_e post;
  state_e state;

  // Iterative datapath.
  word_t          mcand, mplier, acc;   // shift-and-add
  logic [257:0]   rem;                  // non-restoring partial remainder (signed)
  word_t          quo, dvd, dvs;
  logic [8:0]     cnt;
  logic           want_mod;
  logic           neg_y;                // negate the signed result
  // square-and-multiply: base, remaining exponent, result, phase
  word_t          e_base, e_exp, e_res;
  logic           e_sq;                 // next product squares the base
  logic           in_exp;               // the running product belongs to EXP
  word_t          mul_y;                // product once the last multiplier bit is in
  word_t          op_b, op_c;           // ADDMOD / MULMOD operands held
  word_t          t_a;                  // a mod c
  word_t          div_y;                // quotient or remainder of a division
  logic [255:0]   mm_r;                 // interleaved modular product
  assign mul_y = mplier[0] ? acc + mcand : acc;

  // Combinational results.
  word_t y_comb;
  logic  b_pow2;
  logic [7:0] b_log2;
  logic  iterative;

  // Division operands: magnitudes for the signed operations.
  logic  sgn;
  word_t ad, bd;
  always_comb begin
    sgn = (op == ALU_SDIV || op == ALU_SMOD);
    ad  = (sgn && a[255]) ? -a : a;
    bd  = (sgn && b[255]) ? -b : b;
  end

  always_comb begin
    b_pow2 = (bd != '0) && ((bd & (bd - 1'b1)) == '0);
    b_log2 = '0;
    for (int i = 0; i < 256; i++) if (bd[i]) b_log2 = 8'(i);
  end

  // ADDMOD sum and MULMOD step, each with a conditional subtraction of c.
  logic [256:0] am_sum, mm_dbl, mm_add;
  word_t        am_y, mm_dbl_r, mm_next;
  always_comb begin
    am_sum   = {1'b0, t_a} + {1'b0, div_y};
    am_y     = (am_sum >= {1'b0, op_c}) ? 256'(am_sum - {1'b0, op_c}) : am_sum[255:0];
    mm_dbl   = {mm_r, 1'b0};
    mm_dbl_r = (mm_dbl >= {1'b0, op_c}) ? 256'(mm_dbl - {1'b0, op_c}) : mm_dbl[255:0];
    mm_add   = {1'b0, mm_dbl_r} + {1'b0, t_a};
    mm_next  = !op_b[255] ? mm_dbl_r :
               (mm_add >= {1'b0, op_c}) ? 256'(mm_add - {1'b0, op_c}) : mm_add[255:0];
  end

  // Sign of a signed result: quotient negative when the signs differ,
  // remainder with the sign of the dividend.
  logic neg_c;
  assign neg_c = (op == ALU_SDIV) ? (a[255] ^ b[255]) : a[255];

  always_comb begin
    y_comb    = '0;
    iterative = 1'b0;
    unique case (op)
      ALU_ADD:    y_comb = a + b;
      ALU_SUB:    y_comb = a - b;
      ALU_LT:     y_comb = word_t'(a < b);
      ALU_GT:     y_comb = word_t'(a > b);
      ALU_SLT:    y_comb = word_t'($signed(a) < $signed(b));
      ALU_SGT:    y_comb = word_t'($signed(a) > $signed(b));
      ALU_EQ:     y_comb = word_t'(a == b);
      ALU_ISZERO: y_comb = word_t'(a == '0);
      ALU_AND:    y_comb = a & b;
      ALU_OR:     y_comb = a | b;
      ALU_XOR:    y_comb = a ^ b;
      ALU_NOT:    y_comb = ~a;
      ALU_BYTE:   y_comb = (a < 32) ? word_t'(b[8*(31 - int'(a[4:0])) +: 8]) : '0;
      ALU_SHL:    y_comb = (a < 256) ? (b << a[7:0]) : '0;
      ALU_SHR:    y_comb = (a < 256) ? (b >> a[7:0]) : '0;
      ALU_SAR:    y_comb = (a < 256) ? word_t'($signed(b) >>> a[7:0]) : {256{b[255]}};
      ALU_MUL:    begin
                    if (a == '0 || b == '0) y_comb = '0;
                    else iterative = 1'b1;
                  end
      ALU_DIV:    begin
                    if (b == '0)  y_comb = '0;
                    else if (b_pow2) y_comb = a >> b_log2;
                    else iterative = 1'b1;
                  end
      ALU_MOD:    begin
                    if (b == '0)  y_comb = '0;
                    else if (b_pow2) y_comb = a & (b - 1'b1);
                    else iterative = 1'b1;
                  end
      ALU_SDIV:   begin
                    if (b == '0)  y_comb = '0;
                    else if (b_pow2) y_comb = neg_c ? -(ad >> b_log2) : (ad >> b_log2);
                    else iterative = 1'b1;
                  end
      ALU_SMOD:   begin
                    if (b == '0)  y_comb = '0;
                    else if (b_pow2) y_comb = neg_c ? -(ad & (bd - 1'b1)) : (ad & (bd - 1'b1));
                    else iterative = 1'b1;
                  end
      ALU_EXP:    begin
                    if (b == '0) y_comb = word_t'(1);
                    else iterative = 1'b1;
                  end
      ALU_ADDMOD, ALU_MULMOD: begin
                    if (c == '0) y_comb = '0;
                    else iterative = 1'b1;
                  end
      ALU_SIGNEXT: begin
                    y_comb = b;
                    if (a < 31) begin
                      for (int i = 0; i < 256; i++)
                        if (i > 8 * int'(a[4:0]) + 7) y_comb[i] = b[8 * int'(a[4:0]) + 7];
                    end
                  end
      default:    y_comb = '0;
    endcase
  end

  // One non-restoring step: shift in the next dividend bit, then subtract the
  // divisor if the partial remainder is non-negative, else add it.
  logic [257:0] rem_shift, rem_next;
  always_comb begin
    rem_shift = {rem[256:0], dvd[255]};
    if (!rem[257]) rem_next = rem_shift - {2'b00, dvs};
    else           rem_next = rem_shift + {2'b00, dvs};
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cnt   <= '0;
      want_mod <= 1'b0;
      neg_y <= 1'b0;
      in_exp <= 1'b0;
      e_sq <= 1'b0;
      post <= P_NONE;
    end else begin
      unique case (state)
        S_IDLE: begin
          if (start && iterative) begin
            if (op == ALU_MUL) begin
              mcand <= a; mplier <= b; acc <= '0;
              in_exp <= 1'b0;
              state <= S_MUL;
            end else if (op == ALU_EXP) begin
              e_base <= a; e_exp <= b; e_res <= word_t'(1); e_sq <= 1'b0;
              in_exp <= 1'b1;
              state <= S_EXP;
            end else if (op == ALU_ADDMOD || op == ALU_MULMOD) begin
              // first reduce a modulo c
              op_b <= b; op_c <= c;
              dvd <= a; dvs <= c; rem <= '0; quo <= '0; cnt <= 9'd256;
              want_mod <= 1'b1; neg_y <= 1'b0;
              post <= (op == ALU_ADDMOD) ? P_ADD1 : P_MUL1;
              state <= S_DIV;
            end else begin
              dvd <= ad; dvs <= bd; rem <= '0; quo <= '0; cnt <= 9'd256;
              want_mod <= (op == ALU_MOD || op == ALU_SMOD);
              neg_y <= sgn && neg_c;
              post <= P_NONE;
              state <= S_DIV;
            end
          end
        end
        S_MUL: begin
          if (mplier[0]) acc <= acc + mcand;
          mcand  <= mcand << 1;
          mplier <= mplier >> 1;
          if (mplier[255:1] == '0) begin
            if (!in_exp) state <= S_IDLE;
            else begin
              // hand the product back to square-and-multiply
              if (e_sq) begin
                e_base <= mul_y;
                e_exp  <= e_exp >> 1;
                e_sq   <= 1'b0;
              end else begin
                e_res <= mul_y;
                e_sq  <= 1'b1;
              end
              state <= S_EXP;
            end
          end
        end
        // Square-and-multiply, exponent bits from the least significant:
        // multiply the result by the base when the bit is set, then square
        // the base unless no higher exponent bit remains.
        S_EXP: begin
          if (e_exp == '0) state <= S_IDLE;
          else if (!e_sq) begin
            if (e_exp[0]) begin
              mcand <= e_res; mplier <= e_base; acc <= '0;
              state <= S_MUL;
            end else e_sq <= 1'b1;
          end else begin
            if (e_exp[255:1] == '0) begin
              e_exp <= '0;
              e_sq  <= 1'b0;
            end else begin
              mcand <= e_base; mplier <= e_base; acc <= '0;
              state <= S_MUL;
            end
          end
        end
        S_DIV: begin
          rem <= rem_next;
          quo <= {quo[254:0], ~rem_next[257]};
          dvd <= dvd << 1;
          cnt <= cnt - 1'b1;
          if (cnt == 9'd1) begin
            unique case (post)
              P_ADD1: begin     // a mod c done: reduce b
                t_a <= div_y;
                dvd <= op_b; dvs <= op_c; rem <= '0; quo <= '0; cnt <= 9'd256;
                post <= P_ADD2;
              end
              P_MUL1: begin     // a mod c done: multiply by b bit by bit
                t_a <= div_y;
                mm_r <= '0; cnt <= 9'd256;
                post <= P_NONE;
                state <= S_MM;
              end
              default: begin
                post <= P_NONE;
                state <= S_IDLE;
              end
            endcase
          end
        end
        S_MM: begin
          mm_r <= mm_next;
          op_b <= op_b << 1;
          cnt  <= cnt - 1'b1;
          if (cnt == 9'd1) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Result and completion.
  logic  it_done;
  word_t it_y;
  always_comb begin
    if (want_mod) div_y = rem_next[257] ? 256'(rem_next + {2'b00, dvs}) : rem_next[255:0];
    else          div_y = {quo[254:0], ~rem_next[257]};
  end

  always_comb begin
    it_done = 1'b0;
    it_y    = '0;
    if (state == S_MUL && mplier[255:1] == '0 && !in_exp) begin
      it_done = 1'b1;
      it_y    = mul_y;
    end
    if (state == S_EXP && e_exp == '0) begin
      it_done = 1'b1;
      it_y    = e_res;
    end
    if (state == S_DIV && cnt == 9'd1) begin
      it_done = (post == P_NONE || post == P_ADD2);
      it_y = (post == P_ADD2) ? am_y : neg_y ? -div_y : div_y;
    end
    if (state == S_MM && cnt == 9'd1) begin
      it_done = 1'b1;
      it_y    = mm_next;
    end
  end

  assign done = (start && state == S_IDLE && !iterative) || it_done;
  assign y    = (state == S_IDLE) ? y_comb : it_y;
endmodule
