// sha1_gw: message-schedule generator GW.
//
// Inputs are the sixteen 32-bit words u_j[0..15] of the current 512-bit block
// and the round index n. Words 0..15 of the schedule are the u_j words
// themselves; words 16..79 come from 64 SWk units, each fed by the four
// earlier words its recurrence names (u_j words or outputs of earlier SWk
// units), so the units form the chain of the design's GW drawing. The 80-input
// W-MUX then selects w[n]. Each SWk is written once per block, at round k-3,
// so one schedule word is ready every clock and the u_j words must stay
// stable for the whole block (80 cycles).
module sha1_gw
  import sha1_pkg::*;
(
  input  logic            clk,
  input  round_t          n,
  input  word_t  [15:0]   u,   // u[i] = u_j[i]
  output word_t           w    // w[n]
);
  word_t wv [80];              // all 80 schedule words, W-MUX inputs

  for (genvar i = 0; i < 16; i++) begin : g_u
    assign wv[i] = u[i];
  end

  for (genvar k = 16; k < 80; k++) begin : g_sw
    sha1_sw #(.K(k)) u_sw (
      .clk (clk),
      .n   (n),
      .w3  (wv[k-3]),
      .w8  (wv[k-8]),
      .w14 (wv[k-14]),
      .w16 (wv[k-16]),
      .sw  (wv[k])
    );
  end

  // W-MUX
  always_comb begin
    w = wv[0];
    for (int i = 0; i < 80; i++)
      if (n == round_t'(i)) w = wv[i];
  end
endmodule
