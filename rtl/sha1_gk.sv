// sha1_gk: round-constant generator GK.
//
// Selects one of the four 32-bit SHA-1 constants k(n) from the round group v
// produced by GV (0: 0x5A827999, 1: 0x6ED9EBA1, 2: 0x8F1BBCDC,
// 3: 0xCA62C1D6). Combinational.
module sha1_gk
  import sha1_pkg::*;
(
  input  logic [1:0] v,
  output word_t      k
);
  always_comb begin
    unique case (v)
      2'd0:    k = K_0;
      2'd1:    k = K_1;
      2'd2:    k = K_2;
      default: k = K_3;
    endcase
  end
endmodule
