// sha1_ref_pkg: behavioural SHA-1 reference for the testbenches.
//
// sha1_ref() hashes a message of k bits given left-aligned in a 4096-bit
// vector (first message bit in bit 4095), so messages up to 4031 bits. It pads
// bit by bit, expands all 80 schedule words in an array and runs the rounds
// with the textbook formulas (FIPS 180-4), written independently of the RTL.
// Also has a bit-level padding builder and a rotate used by the unit tests.
package sha1_ref_pkg;

  localparam int unsigned MAXB = 4096;

  function automatic logic [31:0] rol(input logic [31:0] x, input int s);
    logic [31:0] y;
    for (int i = 0; i < 32; i++) y[(i + s) % 32] = x[i];
    return y;
  endfunction

  function automatic int nblocks(input int unsigned k);
    return (k + 65 + 511) / 512;
  endfunction

  // padded message, left aligned: bit p of the stream at index MAXB-1-p
  function automatic logic [MAXB-1:0] pad(input logic [MAXB-1:0] msg,
                                          input int unsigned k);
    logic [MAXB-1:0] z;
    int nb;
    z  = '0;
    nb = nblocks(k);
    for (int p = 0; p < k; p++) z[MAXB-1-p] = msg[MAXB-1-p];
    z[MAXB-1-k] = 1'b1;
    for (int b = 0; b < 64; b++)
      z[MAXB-1-(nb*512-1-b)] = (b < 32) ? k[b] : 1'b0;
    return z;
  endfunction

  function automatic logic [159:0] sha1_ref(input logic [MAXB-1:0] msg,
                                            input int unsigned k);
    logic [MAXB-1:0] z;
    logic [31:0] h [5];
    logic [31:0] w [80];
    logic [31:0] a, b, c, d, e, f, kk, t;
    int nb;
    z  = pad(msg, k);
    nb = nblocks(k);
    h[0] = 32'h67452301; h[1] = 32'hEFCDAB89; h[2] = 32'h98BADCFE;
    h[3] = 32'h10325476; h[4] = 32'hC3D2E1F0;
    for (int blk = 0; blk < nb; blk++) begin
      for (int i = 0; i < 16; i++)
        for (int bit_i = 0; bit_i < 32; bit_i++)
          w[i][31-bit_i] = z[MAXB-1-(blk*512 + i*32 + bit_i)];
      for (int i = 16; i < 80; i++)
        w[i] = rol(w[i-3] ^ w[i-8] ^ w[i-14] ^ w[i-16], 1);
      a = h[0]; b = h[1]; c = h[2]; d = h[3]; e = h[4];
      for (int i = 0; i < 80; i++) begin
        if (i < 20)      begin f = (b & c) | (~b & d);          kk = 32'h5A827999; end
        else if (i < 40) begin f = b ^ c ^ d;                   kk = 32'h6ED9EBA1; end
        else if (i < 60) begin f = (b & c) | (b & d) | (c & d); kk = 32'h8F1BBCDC; end
        else             begin f = b ^ c ^ d;                   kk = 32'hCA62C1D6; end
        t = rol(a, 5) + f + e + kk + w[i];
        e = d; d = c; c = rol(b, 30); b = a; a = t;
      end
      h[0] += a; h[1] += b; h[2] += c; h[3] += d; h[4] += e;
    end
    return {h[0], h[1], h[2], h[3], h[4]};
  endfunction

  // random message of k bits, left aligned, junk after bit k
  function automatic logic [MAXB-1:0] rand_msg();
    logic [MAXB-1:0] r;
    for (int i = 0; i < MAXB / 32; i++) r[i*32 +: 32] = $urandom;
    return r;
  endfunction

endpackage
