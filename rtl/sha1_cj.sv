// sha1_cj: block counter CJ.
//
// Counts the 512-bit block j of the current message, 0..L-1, in a counter of
// ceil(log2 L) bits (at least one). It is cleared when a message is loaded and
// incremented by CN when the 80th round of a block finishes (inc). It wraps to
// 0 after L-1; the controller never lets it pass the message's last block.
// Reset style is this design's choice.
module sha1_cj #(
  parameter int unsigned L  = 4,                          // blocks per message, max
  localparam int unsigned JW = (L > 1) ? $clog2(L) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          inc,
  output logic [JW-1:0] j
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   j <= '0;
    else if (clr) j <= '0;
    else if (inc) j <= (j == JW'(L - 1)) ? '0 : j + JW'(1);
  end
endmodule
