// sha1_hvars: working-variable registers RA, RB, RC, RD and RE.
//
// Hold A(n-1)..E(n-1) during round n. On step they take the next round's
// values: A from the adder S4 (a_new), B from A, C from LR30 (c_new =
// lr(B,30)), D from C and E from D. On init they are instead loaded with a
// 160-bit value {A,B,C,D,E}: h0 for the first block of a message, the updated
// hash for each later block. init has priority over step. No reset: the
// registers are always initialised before the first round reads them.
module sha1_hvars
  import sha1_pkg::*;
(
  input  logic              clk,
  input  logic              init,
  input  logic [HASH_W-1:0] init_val,
  input  logic              step,
  input  word_t             a_new,
  input  word_t             c_new,
  output word_t             a,
  output word_t             b,
  output word_t             c,
  output word_t             d,
  output word_t             e
);
  always_ff @(posedge clk) begin
    if (init) begin
      {a, b, c, d, e} <= init_val;
    end else if (step) begin
      a <= a_new;   // RA <- S4
      b <= a;       // RB <- RA
      c <= c_new;   // RC <- LR30(RB)
      d <= c;       // RD <- RC
      e <= d;       // RE <- RD
    end
  end
endmodule
