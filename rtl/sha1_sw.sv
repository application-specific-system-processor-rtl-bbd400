// sha1_sw: message-schedule unit SWk, one per schedule word k = 16..79.
//
// XORs the four earlier schedule words w[k-3], w[k-8], w[k-14] and w[k-16],
// rotates the result left by one (LR1) and stores it in register RWk. A
// comparator enables RWk only in the clock cycle in which the round index is
// n = k-3, the last round in which a new input word (w[k-3]) appears, so
// sw[k] is available from round k-2 onward and stays stable while the W-MUX
// selects it at round k. Structure and enable condition follow the design's
// SWk drawing. RWk is not reset: it is always written before it is read.
module sha1_sw
  import sha1_pkg::*;
#(
  parameter int unsigned K = 16   // schedule index, 16..79
) (
  input  logic   clk,
  input  round_t n,
  input  word_t  w3,    // w[K-3]
  input  word_t  w8,    // w[K-8]
  input  word_t  w14,   // w[K-14]
  input  word_t  w16,   // w[K-16]
  output word_t  sw     // sw[K], output of RWk
);
  initial assert (K >= 16 && K <= 79) else $error("sha1_sw: K must be 16..79");

  word_t x, xr;
  logic  en;

  always_comb x  = w3 ^ w8 ^ w14 ^ w16;
  sha1_lr #(.S(1)) u_lr1 (.r(x), .y(xr));
  always_comb en = (n == round_t'(K - 3));

  always_ff @(posedge clk)
    if (en) sw <= xr;
endmodule
