// sha1_gv: round-group decoder GV.
//
// Compares the 7-bit round index n from CN with the group boundaries and
// outputs v = 0 for n = 0..19, 1 for 20..39, 2 for 40..59 and 3 for 60..79,
// which drives both the GF-MUX and GK. Values of n above 79 never occur (CN
// wraps at 79) and give v = 3. Combinational.
module sha1_gv
  import sha1_pkg::*;
(
  input  round_t     n,
  output logic [1:0] v
);
  always_comb begin
    if (n < 7'd20)      v = GRP_CH;
    else if (n < 7'd40) v = GRP_PAR1;
    else if (n < 7'd60) v = GRP_MAJ;
    else                v = GRP_PAR2;
  end
endmodule
