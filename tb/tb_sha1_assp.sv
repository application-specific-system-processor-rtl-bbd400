// tb_sha1_assp: end-to-end test of the whole processor at its default size
// (48 cores, messages up to 4 blocks). Every core hashes its own stream of
// messages concurrently; each digest is compared with the behavioural SHA-1
// reference and its latency with 80 clocks per block. The test counts, and
// requires at least once, each mechanism of the design: a single-block
// message, a multi-block message, a length whose padding spills into an extra
// block, an empty message, a longest message (4 blocks), a message accepted
// while idle, one accepted back-to-back in the final round of the previous
// message, and several cores finishing in the same clock.
module tb_sha1_assp;
  import sha1_ref_pkg::*;
  localparam int NI = 48, L = 4, ZW = 512 * L, MSG_W = ZW - 65, NMSG = 6;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  logic [NI-1:0] start, ready, hash_valid;
  logic [NI-1:0][MSG_W-1:0] m;
  logic [NI-1:0][10:0] k_len;
  logic [NI-1:0][159:0] hash;
  int cyc = 0;
  int n_single = 0, n_multi = 0, n_spill = 0, n_empty = 0, n_max = 0;
  int n_idle = 0, n_b2b = 0, n_parallel = 0, n_done = 0;

  typedef struct { logic [159:0] h; int due; } exp_t;
  exp_t q[NI][$];

  sha1_assp dut (.clk, .rst_n, .start, .ready, .m, .k_len, .hash, .hash_valid);

  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // asynchronous reset pulse
  always @(posedge clk) cyc <= cyc + 1;

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic int pick_len(input int core, input int idx);
    case ((core + idx) % 8)
      0: return 0;                                   // empty
      1: return MSG_W;                               // longest
      2: return 448 + int'($urandom % 64);           // padding spills
      3: return int'($urandom % 448);                // one block
      default: return int'($urandom % (MSG_W + 1));
    endcase
  endfunction

  task automatic drive(input int c);
    logic [MAXB-1:0] msg;
    exp_t e;
    int k, nb;
    for (int idx = 0; idx < NMSG; idx++) begin
      k = pick_len(c, idx);
      nb = nblocks(k);
      msg = rand_msg();
      e.h = sha1_ref(msg, k);
      if (idx == 3) repeat (c % 7 + 1) @(negedge clk);   // some idle time
      @(negedge clk);
      m[c] = msg[MAXB-1 -: MSG_W];
      k_len[c] = 11'(k);
      start[c] = 1'b1;
      while (!ready[c]) @(negedge clk);
      // back-to-back: accepted on the edge that completes the previous hash
      if (q[c].size() > 0 && q[c][q[c].size()-1].due == cyc + 1) n_b2b++;
      else n_idle++;
      e.due = cyc + 1 + 80 * nb;
      q[c].push_back(e);
      if (nb == 1) n_single++; else n_multi++;
      if (k % 512 >= 448) n_spill++;
      if (k == 0) n_empty++;
      if (nb == L) n_max++;
      @(posedge clk);
      #1 start[c] = 1'b0;
    end
  endtask

  // check every digest and its latency
  always @(negedge clk) if (rst_n) begin
    int nv;
    nv = 0;
    for (int c = 0; c < NI; c++) if (hash_valid[c]) begin
      exp_t e;
      nv++;
      n_done++;
      if (q[c].size() == 0) chk(0, $sformatf("core %0d unexpected hash_valid", c));
      else begin
        e = q[c].pop_front();
        chk(hash[c] == e.h, $sformatf("core %0d hash %h exp %h", c, hash[c], e.h));
        chk(cyc == e.due, $sformatf("core %0d latency: valid at %0d, expected %0d", c, cyc, e.due));
      end
    end
    if (nv > 1) n_parallel++;
  end

  initial begin
    #20000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = '0; m = '0; k_len = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < NI; c++)
      fork
        automatic int cc = c;
        drive(cc);
      join_none
    wait fork;
    for (int c = 0; c < NI; c++) wait (q[c].size() == 0);
    repeat (3) @(negedge clk);
    chk(n_done == NI * NMSG, $sformatf("hashes produced %0d of %0d", n_done, NI * NMSG));
    $display("mechanisms: single=%0d multi=%0d spill=%0d empty=%0d longest=%0d idle_accept=%0d back_to_back=%0d parallel_done=%0d",
             n_single, n_multi, n_spill, n_empty, n_max, n_idle, n_b2b, n_parallel);
    chk(n_single > 0, "single-block message never ran");
    chk(n_multi > 0, "multi-block message never ran");
    chk(n_spill > 0, "padding spill never happened");
    chk(n_empty > 0, "empty message never ran");
    chk(n_max > 0, "longest message never ran");
    chk(n_idle > 0, "accept while idle never happened");
    chk(n_b2b > 0, "back-to-back accept never happened");
    chk(n_parallel > 0, "cores never finished together");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
