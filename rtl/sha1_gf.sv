// sha1_gf: nonlinear round function GF.
//
// Computes the four candidate functions of B(n-1), C(n-1), D(n-1) in
// parallel and lets the GF-MUX pick one by the round group v from GV:
//   0: alpha = (B & C) | (~B & D)            (rounds 0..19)
//   1: beta  = B ^ C ^ D                     (rounds 20..39)
//   2: gamma = (B & C) | (B & D) | (C & D)   (rounds 40..59)
//   3: delta = B ^ C ^ D                     (rounds 60..79)
// The four functions and the mux numbering 0..3 follow the description; the
// inputs are the register outputs RB, RC, RD, i.e. B(n-1), C(n-1), D(n-1).
// Combinational.
module sha1_gf
  import sha1_pkg::*;
(
  input  word_t      b,
  input  word_t      c,
  input  word_t      d,
  input  logic [1:0] v,
  output word_t      f
);
  word_t alpha, beta, gamma, delta;

  always_comb begin
    alpha = (b & c) | (~b & d);
    beta  = (b ^ c) ^ d;
    gamma = ((b & c) | (b & d)) | (c & d);
    delta = (b ^ c) ^ d;
    unique case (v)       // GF-MUX
      2'd0:    f = alpha;
      2'd1:    f = beta;
      2'd2:    f = gamma;
      default: f = delta;
    endcase
  end
endmodule
