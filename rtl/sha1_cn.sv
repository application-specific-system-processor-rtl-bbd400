// sha1_cn: round counter CN.
//
// A 7-bit counter that produces the round index n of the inner loop. It is
// cleared to 0 by clr (when a new message is loaded) and, while en is high,
// steps 0, 1, ..., 79 and wraps back to 0, one step per clock, so one SHA-1
// round is done per clock. last flags n == 79; the block counter CJ uses it to
// advance. The synchronous clear and the active-low asynchronous reset are
// this design's choice.
module sha1_cn
  import sha1_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   clr,
  input  logic   en,
  output round_t n,
  output logic   last
);
  always_comb last = (n == round_t'(ROUNDS - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      n <= '0;
    else if (clr)    n <= '0;
    else if (en)     n <= last ? '0 : n + 7'd1;
  end
endmodule
