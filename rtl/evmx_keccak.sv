// Keccak256 hash unit (KEC) of EVMx.
//
// Hashes a byte stream with Keccak-f[1600] at rate 1088 bits (136 bytes) and
// the original Keccak padding (0x01 ... 0x80) used by Ethereum. 'init' clears
// the state. While 'ready' is high, a byte on 'in_byte' with 'in_valid' is
// XORed into the state at the next rate position, one byte per cycle. When
// the 136th byte of a block arrives the unit runs the permutation, one round
// per cycle for 24 cycles, with 'ready' low. 'finish' (while ready) pads the
// last block and permutes it; 'done' then pulses for one cycle and 'digest'
// holds the 32-byte hash, first byte in bits [255:248], until the next init.
// An empty message is hashed by 'init' then 'finish'. The paper names the
// block and its function; the byte-serial interface and the round-per-cycle
// structure are this design's choices, the permutation is the standard one.
module evmx_keccak (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         init,
  input  logic         in_valid,
  input  logic [7:0]   in_byte,
  input  logic         finish,
  output logic         ready,
  output logic         done,
  output logic [255:0] digest
);
  localparam int unsigned RATE = 136;

  localparam logic [63:0] RC [24] = '{
    64'h0000000000000001, 64'h0000000000008082, 64'h800000000000808A, 64'h8000000080008000,
    64'h000000000000808B, 64'h0000000080000001, 64'h8000000080008081, 64'h8000000000008009,
    64'h000000000000008A, 64'h0000000000000088, 64'h0000000080008009, 64'h000000008000000A,
    64'h000000008000808B, 64'h800000000000008B, 64'h8000000000008089, 64'h8000000000008003,
    64'h8000000000008002, 64'h8000000000000080, 64'h000000000000800A, 64'h800000008000000A,
    64'h8000000080008081, 64'h8000000000008080, 64'h0000000080000001, 64'h8000000080008008};

  // Rotation offsets, indexed [x][y].
  localparam int ROT [5][5] = '{
    '{ 0, 36,  3, 41, 18},
    '{ 1, 44, 10, 45,  2},
    '{62,  6, 43, 15, 61},
    '{28, 55, 25, 21, 56},
    '{27, 20, 39,  8, 14}};

  typedef logic [63:0] lane_t;
  lane_t st [25];           // lane (x, y) at index x + 5*y
  lane_t rnd [25];          // state after one round

  logic [7:0] pos;          // next byte position in the block
  logic [4:0] round;
  logic       permuting, last_block;

  function automatic lane_t rotl(input lane_t v, input int n);
    return (n == 0) ? v : ((v << n) | (v >> (64 - n)));
  endfunction

  // One Keccak-f round: theta, rho and pi, chi, iota.
  always_comb begin
    lane_t c [5];
    lane_t d [5];
    lane_t bb [25];
    for (int x = 0; x < 5; x++)
      c[x] = st[x] ^ st[x+5] ^ st[x+10] ^ st[x+15] ^ st[x+20];
    for (int x = 0; x < 5; x++)
      d[x] = c[(x+4)%5] ^ rotl(c[(x+1)%5], 1);
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        bb[y + 5*((2*x + 3*y) % 5)] = rotl(st[x + 5*y] ^ d[x], ROT[x][y]);
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        rnd[x + 5*y] = bb[x + 5*y] ^ (~bb[(x+1)%5 + 5*y] & bb[(x+2)%5 + 5*y]);
    rnd[0] = rnd[0] ^ RC[round];
  end

  assign ready = !permuting && !init;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      permuting  <= 1'b0;
      last_block <= 1'b0;
      done       <= 1'b0;
      pos        <= '0;
      round      <= '0;
      for (int i = 0; i < 25; i++) st[i] <= '0;
    end else begin
      done <= 1'b0;
      if (init) begin
        for (int i = 0; i < 25; i++) st[i] <= '0;
        pos        <= '0;
        permuting  <= 1'b0;
        last_block <= 1'b0;
      end else if (permuting) begin
        for (int i = 0; i < 25; i++) st[i] <= rnd[i];
        round <= round + 1'b1;
        if (round == 5'd23) begin
          permuting <= 1'b0;
          round     <= '0;
          if (last_block) begin
            done       <= 1'b1;
            last_block <= 1'b0;
          end
        end
      end else if (in_valid) begin
        st[pos/8][8*(pos%8) +: 8] <= st[pos/8][8*(pos%8) +: 8] ^ in_byte;
        if (pos == 8'(RATE - 1)) begin
          pos       <= '0;
          permuting <= 1'b1;
        end else begin
          pos <= pos + 1'b1;
        end
      end else if (finish) begin
        // Padding: 0x01 after the message, 0x80 in the last rate byte.
        if (pos == 8'(RATE - 1))
          st[(RATE-1)/8][8*((RATE-1)%8) +: 8] <= st[(RATE-1)/8][8*((RATE-1)%8) +: 8] ^ 8'h81;
        else begin
          st[pos/8][8*(pos%8) +: 8] <= st[pos/8][8*(pos%8) +: 8] ^ 8'h01;
          st[(RATE-1)/8][8*((RATE-1)%8) +: 8] <= st[(RATE-1)/8][8*((RATE-1)%8) +: 8] ^ 8'h80;
        end
        pos        <= '0;
        permuting  <= 1'b1;
        last_block <= 1'b1;
      end
    end
  end

  // Digest: the first 32 bytes of the state, lanes read little-endian.
  always_comb begin
    for (int j = 0; j < 32; j++)
      digest[255-8*j -: 8] = st[j/8][8*(j%8) +: 8];
  end
endmodule
