// sha1_pkg: types, constants and helper functions shared by the SHA-1 core.
//
// Holds the FIPS 180-4 initial hash value (h0) and the four round constants
// k(n), both as given in the design description, a 32-bit word type, the
// round-index type used by the CN counter (7 bits, as in the description)
// and a reference left-rotate function used by the testbenches.
package sha1_pkg;

  typedef logic [31:0] word_t;
  typedef logic [6:0]  round_t;     // n = 0..79, counter CN is 7 bits wide

  localparam int unsigned LENF_W   = 64;    // T, width of the length field
  localparam int unsigned HASH_W   = 160;   // C
  localparam int unsigned ROUNDS   = 80;

  // Initial hash value h0 = [ha hb hc hd he]
  localparam word_t H0_A = 32'd1732584193;  // 0x67452301
  localparam word_t H0_B = 32'd4023233417;  // 0xEFCDAB89
  localparam word_t H0_C = 32'd2562383102;  // 0x98BADCFE
  localparam word_t H0_D = 32'd271733878;   // 0x10325476
  localparam word_t H0_E = 32'd3285377520;  // 0xC3D2E1F0

  // Round constants k(n) per group of 20 rounds
  localparam word_t K_0 = 32'd1518500249;   // 0x5A827999, n = 0..19
  localparam word_t K_1 = 32'd1859775393;   // 0x6ED9EBA1, n = 20..39
  localparam word_t K_2 = 32'd2400959708;   // 0x8F1BBCDC, n = 40..59
  localparam word_t K_3 = 32'd3395469782;   // 0xCA62C1D6, n = 60..79

  // Round group selected by GV
  typedef enum logic [1:0] {
    GRP_CH     = 2'd0,  // alpha, n = 0..19
    GRP_PAR1   = 2'd1,  // beta,  n = 20..39
    GRP_MAJ    = 2'd2,  // gamma, n = 40..59
    GRP_PAR2   = 2'd3   // delta, n = 60..79
  } grp_e;

  function automatic word_t rotl(input word_t r, input int unsigned s);
    return (r << s) | (r >> (32 - s));
  endfunction

endpackage
