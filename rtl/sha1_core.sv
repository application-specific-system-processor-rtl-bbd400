// sha1_core: one SHA-1 instance, one round per clock.
//
// Datapath and control of the design's general architecture:
//   INIT pads the message and sequences the loops, CN counts the round n,
//   CJ counts the block j, DM picks block b_j of z and splits it into u_j[0..15],
//   GW produces w[n], GV/GK/GF give k(n) and f(n), and the adders compute
//     S1: V = f + k      S2: Z = w + E      S3: V + Z      S4: + lr(A,5)
//   whose result is the new A. RA..RE shift (B<-A, C<-lr(B,30), D<-C, E<-D).
//   HA..HE accumulate the hash at the end of each block and CO outputs h_i.
//
// Interface: pulse start with the message m (first bit in m[MSG_W-1]) and its
// length k_len in bits while ready is high. k_len may be 0 .. 512*L-65.
// Timing: if start is accepted at clock edge c, round n of block j runs between
// edges c+80*j+n and c+80*j+n+1, and hash_valid is high for the one clock
// after edge c+80*L_i, with hash = h_i (held until the next result). ready is
// also high in the final round, so back-to-back messages cost exactly 80
// clocks per 512-bit block, as the throughput figure of the design assumes.
// The working registers are re-initialised from the updated hash on the same
// edge that ends round 79, instead of in an extra clock; this is this
// implementation's choice, the description only states 80 rounds per block.
module sha1_core
  import sha1_pkg::*;
#(
  parameter int unsigned L  = 4,                   // max blocks per message
  localparam int unsigned ZW    = 512 * L,
  localparam int unsigned MSG_W = ZW - 65,
  localparam int unsigned LEN_W = $clog2(ZW),
  localparam int unsigned JW    = (L > 1) ? $clog2(L) : 1,
  localparam int unsigned NBW   = $clog2(L + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              ready,
  input  logic [MSG_W-1:0]  m,
  input  logic [LEN_W-1:0]  k_len,
  output logic [HASH_W-1:0] hash,
  output logic              hash_valid
);
  // control
  logic            load, run, done, last_round, blk_end;
  round_t          n;
  logic [JW-1:0]   j;
  logic [ZW-1:0]   z;
  logic [NBW-1:0]  nblk;
  logic [HASH_W-1:0] h0;

  // datapath
  word_t [15:0] u;
  word_t w, f, k, v_sum, z_sum, s3, a_rot, a_new, c_new;
  word_t ra, rb, rc, rd, re;
  logic [1:0] v;
  word_t sa, sb, sc, sd, se;
  logic  hv_init;
  logic [HASH_W-1:0] hv_val;

  sha1_init #(.L(L)) u_init (
    .clk, .rst_n, .start, .ready, .m, .k_len,
    .j, .last_round, .load, .run, .last_blk(), .done,
    .z, .nblk, .h0
  );

  always_comb blk_end = run && last_round;

  sha1_cn u_cn (.clk, .rst_n, .clr(load), .en(run), .n, .last(last_round));
  sha1_cj #(.L(L)) u_cj (.clk, .rst_n, .clr(load), .inc(blk_end), .j);

  sha1_dm #(.L(L)) u_dm (.z, .j, .u);
  sha1_gw u_gw (.clk, .n, .u, .w);

  sha1_gv u_gv (.n, .v);
  sha1_gk u_gk (.v, .k);
  sha1_gf u_gf (.b(rb), .c(rc), .d(rd), .v, .f);

  sha1_add32 u_s1 (.a(f),     .b(k),     .s(v_sum));   // V(n)
  sha1_add32 u_s2 (.a(w),     .b(re),    .s(z_sum));   // Z(n)
  sha1_add32 u_s3 (.a(z_sum), .b(v_sum), .s(s3));
  sha1_lr #(.S(5))  u_lr5  (.r(ra), .y(a_rot));
  sha1_add32 u_s4 (.a(s3),    .b(a_rot), .s(a_new));   // A(n)
  sha1_lr #(.S(30)) u_lr30 (.r(rb), .y(c_new));        // C(n)

  // HA..HE take A(79)..E(79), i.e. the values the registers get at round 79
  sha1_hupd #(.INIT(H0_A)) u_ha (.clk, .rst_n, .load, .upd(blk_end), .x(a_new), .h(), .sum(sa));
  sha1_hupd #(.INIT(H0_B)) u_hb (.clk, .rst_n, .load, .upd(blk_end), .x(ra),    .h(), .sum(sb));
  sha1_hupd #(.INIT(H0_C)) u_hc (.clk, .rst_n, .load, .upd(blk_end), .x(c_new), .h(), .sum(sc));
  sha1_hupd #(.INIT(H0_D)) u_hd (.clk, .rst_n, .load, .upd(blk_end), .x(rc),    .h(), .sum(sd));
  sha1_hupd #(.INIT(H0_E)) u_he (.clk, .rst_n, .load, .upd(blk_end), .x(rd),    .h(), .sum(se));

  // RA..RE: h0 for a new message, the updated hash for the next block
  always_comb begin
    hv_init = load || blk_end;
    hv_val  = load ? h0 : {sa, sb, sc, sd, se};
  end

  sha1_hvars u_hvars (
    .clk, .init(hv_init), .init_val(hv_val), .step(run),
    .a_new, .c_new, .a(ra), .b(rb), .c(rc), .d(rd), .e(re)
  );

  sha1_co u_co (
    .clk, .rst_n, .capture(done),
    .ha(sa), .hb(sb), .hc(sc), .hd(sd), .he(se),
    .hash, .valid(hash_valid)
  );

  // the loops stay in range
  assert property (@(posedge clk) disable iff (!rst_n) n < round_t'(ROUNDS));
  assert property (@(posedge clk) disable iff (!rst_n) run |-> (32'(j) < 32'(nblk)));
endmodule
