// sha1_lr: constant left rotate of a 32-bit word, lr(r,S).
//
// Follows the rotate equation of the design: lr(r,s) = (r << s) OR
// (r >> (32-s)). The block drawing of this unit labels its lower shifter
// "<< (32-s)"; a left shift there would not rotate, so the right shift of the
// equation is used. Purely combinational wiring; the core uses it as LR1
// (S=1, inside every SWk unit), LR5 (S=5) and LR30 (S=30).
module sha1_lr #(
  parameter int unsigned S = 1    // rotate amount, 1..31
) (
  input  logic [31:0] r,
  output logic [31:0] y
);
  initial assert (S >= 1 && S <= 31) else $error("sha1_lr: S must be 1..31");

  logic [31:0] shl, shr;
  always_comb begin
    shl = r << S;
    shr = r >> (32 - S);
    y   = shl | shr;
  end
endmodule
