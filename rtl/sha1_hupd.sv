// sha1_hupd: one hash-word register with its update adder (HA..HE).
//
// Loaded with its FIPS 180-4 initial word (INIT) when a message starts (load).
// At the end of every 512-bit block (upd, i.e. the clock edge that ends round
// 79) it adds the block's final working variable x (A(79) for HA, B(79) for HB,
// and so on) modulo 2^32. sum = h + x is also given out combinationally so the
// next block's working registers and the output stage can take the updated
// word at that same edge, which keeps a block at exactly 80 clocks. load has
// priority over upd.
module sha1_hupd
  import sha1_pkg::*;
#(
  parameter word_t INIT = H0_A
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  load,
  input  logic  upd,
  input  word_t x,
  output word_t h,
  output word_t sum
);
  sha1_add32 u_add (.a(h), .b(x), .s(sum));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    h <= INIT;
    else if (load) h <= INIT;
    else if (upd)  h <= sum;
  end
endmodule
