// RLP encoder (RPL) of EVMx for the CREATE address.
//
// Computes the recursive-length-prefix encoding of the two-item list
// [sAddr, sNoc] whose Keccak256 digest gives the address of a contract made
// with CREATE. The 20-byte address is encoded as 0x94 followed by its bytes;
// the nonce as 0x80 when zero, as itself when below 0x80, otherwise as
// 0x80+L followed by its L significant bytes; the list gets the prefix
// 0xc0 + payload length. The encoding (at most 30 bytes here) is returned
// left-aligned in 'enc', first byte in bits [255:248], with its length in
// 'len'. Purely combinational. The paper names the block and its inputs; the
// encoding rules are Ethereum's and the 64-bit nonce width is this design's.
module evmx_rlp #(
  parameter int unsigned NW = 64
) (
  input  logic [159:0]  s_addr,
  input  logic [NW-1:0] s_noc,
  output logic [255:0]  enc,
  output logic [5:0]    len
);
  localparam int unsigned NB = NW / 8;

  always_comb begin
    int unsigned nlen;     // significant bytes of the nonce
    int unsigned p;        // write position
    logic [7:0] b [32];
    for (int i = 0; i < 32; i++) b[i] = 8'h00;
    nlen = 0;
    for (int i = 0; i < int'(NB); i++)
      if (s_noc[8*i +: 8] != 8'h00) nlen = i + 1;
    // list prefix
    if (s_noc == '0 || s_noc < NW'(8'h80)) b[0] = 8'(8'hc0 + 8'd22);
    else                                  b[0] = 8'(8'hc0 + 8'd22 + 8'(nlen));
    b[1] = 8'h94;
    for (int i = 0; i < 20; i++) b[2+i] = s_addr[159-8*i -: 8];
    p = 22;
    if (s_noc == '0) begin
      b[p] = 8'h80;
      p = p + 1;
    end else if (s_noc < NW'(8'h80)) begin
      b[p] = s_noc[7:0];
      p = p + 1;
    end else begin
      b[p] = 8'(8'h80 + 8'(nlen));
      p = p + 1;
      for (int i = int'(NB) - 1; i >= 0; i--)
        if (i < int'(nlen)) begin
          b[p] = s_noc[8*i +: 8];
          p = p + 1;
        end
    end
    for (int i = 0; i < 32; i++) enc[255-8*i -: 8] = b[i];
    len = 6'(p);
  end
endmodule
