// sha1_init: message intake, padding, length insertion and loop control (INIT).
//
// When start is accepted (start && ready) the unit builds the extended message
// z = [m p v] and registers it: the first K message bits are kept, a single 1
// follows them, then zeros, and the 64-bit big-endian length K fills the last
// 64 bits of block L_i-1, with L_i = ceil((K + 65) / 512). The message m is
// given left-aligned: its first bit is m[MSG_W-1]; bits past K are ignored.
// Bits of z beyond block L_i-1 are zero and never read.
//
// It also runs the two loops of the algorithm: load pulses in the accept
// cycle (CN and CJ clear, the hash registers take h0), run stays high while
// rounds are executed, last_blk flags that CJ is at block L_i-1 and done pulses
// in the cycle of the final round of the final block. ready is high when idle
// and also during that final round, so a new message can be accepted in the
// same cycle and messages follow each other without a gap: one block every
// 80 clocks. The ready/start handshake, the left-aligned message bus and the
// maximum size L are this design's choices; the padding and length rules are
// the SHA-1 ones given in the description. h0, the constant initial hash
// value, is an output of this unit only because the architecture routes it from
// INIT to the hash registers; it is the same for every message.
module sha1_init
  import sha1_pkg::*;
#(
  parameter int unsigned L  = 4,
  localparam int unsigned ZW    = 512 * L,
  localparam int unsigned MSG_W = ZW - 65,                 // longest message
  localparam int unsigned LEN_W = $clog2(ZW),              // width of K
  localparam int unsigned JW    = (L > 1) ? $clog2(L) : 1,
  localparam int unsigned NBW   = $clog2(L + 1)            // width of L_i
) (
  input  logic             clk,
  input  logic             rst_n,
  // message in
  input  logic             start,
  output logic             ready,
  input  logic [MSG_W-1:0] m,
  input  logic [LEN_W-1:0] k_len,
  // loop control
  input  logic [JW-1:0]    j,          // from CJ
  input  logic             last_round, // from CN, n == 79
  output logic             load,
  output logic             run,
  output logic             last_blk,
  output logic             done,
  // data out
  output logic [ZW-1:0]    z,
  output logic [NBW-1:0]   nblk,       // L_i of the message being hashed
  output logic [HASH_W-1:0] h0
);
  logic [ZW-1:0]    z_nxt, mz, keep, one, lenv;
  logic [NBW-1:0]   nblk_nxt;
  logic [LEN_W:0]   k_ext;

  always_comb h0 = {H0_A, H0_B, H0_C, H0_D, H0_E};

  // PaddingGeneration / LengthGeneration
  always_comb begin
    k_ext    = {1'b0, k_len};
    nblk_nxt = NBW'((k_ext + (LEN_W+1)'(576)) >> 9);
    mz       = {m, 65'b0};
    keep     = ~({ZW{1'b1}} >> k_len);                  // first K bits
    one      = {1'b1, {(ZW-1){1'b0}}} >> k_len;         // p_0 = 1
    lenv     = ZW'({{(LENF_W-LEN_W){1'b0}}, k_len}) << (512 * (L - 32'(nblk_nxt)));
    z_nxt    = (mz & keep) | one | lenv;
  end

  always_comb begin
    last_blk = (32'(j) == 32'(nblk) - 32'd1);
    done     = run && last_round && last_blk;
    ready    = !run || done;
    load     = start && ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run  <= 1'b0;
      z    <= '0;
      nblk <= NBW'(1);
    end else if (load) begin
      run  <= 1'b1;
      z    <= z_nxt;
      nblk <= nblk_nxt;
    end else if (done) begin
      run  <= 1'b0;
    end
  end

  // a message must fit into L blocks together with its padding and length
  assert property (@(posedge clk) disable iff (!rst_n)
                   load |-> (32'(k_len) <= 32'(MSG_W)))
    else $error("sha1_init: message of %0d bits longer than %0d", k_len, MSG_W);
endmodule
