// sha1_add32: 32-bit modulo-2^32 adder used for the sum units S1..S4.
//
// S1 forms V(n) = f(n) + k(n), S2 forms Z(n) = w(n) + E(n-1), S3 adds V and Z
// and S4 adds lr(A(n-1),5) to give A(n). The carry out is dropped, as SHA-1
// requires. Combinational; the adder structure is left to synthesis.
module sha1_add32 (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] s
);
  always_comb s = a + b;
endmodule
