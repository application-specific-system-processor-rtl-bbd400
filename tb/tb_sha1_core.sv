// tb_sha1_core: end-to-end test of one SHA-1 core (L = 4).
// Hashes the standard vectors "" , "abc" and the 448-bit two-block string
// "abcdbcdecdefdefgefghfghighijhijkijkljklmklmnlmnomnopnopq" against their
// published digests, then random messages of 0..1983 bits against the
// behavioural reference. Checks the latency (hash_valid 80*L_i clocks after
// the accepting edge) and that back-to-back messages are accepted in the
// final round of the previous one (80 clocks per block, no gap).
module tb_sha1_core;
  import sha1_ref_pkg::*;
  localparam int L = 4, ZW = 512 * L, MSG_W = ZW - 65;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1, start = 0, ready, hash_valid;
  logic [MSG_W-1:0] m;
  logic [10:0] k_len;
  logic [159:0] hash;
  int cyc = 0;
  int back_to_back = 0;

  typedef struct { logic [159:0] h; int due; } exp_t;
  exp_t q[$];

  sha1_core #(.L(L)) dut (.clk, .rst_n, .start, .ready, .m, .k_len, .hash, .hash_valid);

  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // asynchronous reset pulse
  always @(posedge clk) cyc <= cyc + 1;

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // send one message; returns once it has been accepted
  task automatic send(input logic [MAXB-1:0] msg, input int k, input logic [159:0] h);
    exp_t e;
    @(negedge clk);
    m = msg[MAXB-1 -: MSG_W];
    k_len = 11'(k);
    start = 1;
    while (!ready) @(negedge clk);
    if (dut.run) back_to_back++;   // accepted in the final round of the last message
    e.h = h;
    e.due = cyc + 1 + 80 * nblocks(k);
    q.push_back(e);
    @(posedge clk);
    #1 start = 0;
  endtask

  // monitor
  always @(negedge clk) if (rst_n && hash_valid) begin
    exp_t e;
    if (q.size() == 0) chk(0, "unexpected hash_valid");
    else begin
      e = q.pop_front();
      chk(hash == e.h, $sformatf("hash %h exp %h", hash, e.h));
      chk(cyc == e.due, $sformatf("latency: valid at %0d, expected %0d", cyc, e.due));
    end
  end

  initial begin
    #3000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [MAXB-1:0] msg;
    string s;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // published vectors
    msg = '0;
    send(msg, 0, 160'hda39a3ee5e6b4b0d3255bfef95601890afd80709);
    msg = '0; msg[MAXB-1 -: 24] = "abc";
    send(msg, 24, 160'ha9993e364706816aba3e25717850c26c9cd0d89d);
    s = "abcdbcdecdefdefgefghfghighijhijkijkljklmklmnlmnomnopnopq";
    msg = '0;
    for (int i = 0; i < s.len(); i++) msg[MAXB-1-8*i -: 8] = s[i];
    send(msg, 448, 160'h84983e441c3bd26ebaae4aa1f95129e5e54670f1);
    // random
    for (int t = 0; t < 40; t++) begin
      int k;
      k = (t % 8 == 0) ? MSG_W : int'($urandom % (MSG_W + 1));
      msg = rand_msg();
      send(msg, k, sha1_ref(msg, k));
      if (t % 10 == 9) repeat (5) @(negedge clk);   // idle gaps too
    end
    wait (q.size() == 0);
    repeat (3) @(negedge clk);
    chk(back_to_back > 30, $sformatf("back-to-back accepts: %0d", back_to_back));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
