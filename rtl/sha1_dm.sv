// sha1_dm: message splitter DM.
//
// Takes the padded message z (L blocks of 512 bits, first bit of the message
// in the most significant bit) and the block index j from CJ, selects block
// b_j and cuts it into sixteen 32-bit words u_j[0..15], u_j[0] being the first
// 32 bits of the block (big-endian, as SHA-1 requires). Combinational mux.
module sha1_dm
  import sha1_pkg::*;
#(
  parameter int unsigned L  = 4,
  localparam int unsigned ZW = 512 * L,
  localparam int unsigned JW = (L > 1) ? $clog2(L) : 1
) (
  input  logic [ZW-1:0]  z,
  input  logic [JW-1:0]  j,
  output word_t [15:0]   u
);
  logic [511:0] b;

  always_comb begin
    b = z[ZW-1 -: 512];
    for (int i = 0; i < L; i++)
      if (j == JW'(i)) b = z[ZW-1-512*i -: 512];
    for (int i = 0; i < 16; i++)
      u[i] = b[511-32*i -: 32];
  end
endmodule
