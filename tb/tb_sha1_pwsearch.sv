// tb_sha1_pwsearch: password-recovery workload on the full processor
// (48 cores, default size). The cores search the whole space of 6-digit
// numeric passwords "000000".."999999" for the one whose SHA-1 matches a
// target digest, each core taking a contiguous range of 20834 candidates.
// Every core is fed back-to-back, so the search must take 20834 blocks x 80
// clocks (about 18 ms at a 10.9 ns clock). The test checks that the right
// password is found exactly once, spot-checks every 4096th digest against the
// behavioural reference, and checks the elapsed clock count.
module tb_sha1_pwsearch;
  import sha1_ref_pkg::*;
  localparam int NI = 48, L = 4, MSG_W = 512 * L - 65;
  localparam int NCAND = 1000000, PER_CORE = (NCAND + NI - 1) / NI, SECRET = 271828;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1;
  logic [NI-1:0] start, ready, hash_valid;
  logic [NI-1:0][MSG_W-1:0] m;
  logic [NI-1:0][10:0] k_len;
  logic [NI-1:0][159:0] hash;
  logic [159:0] target;
  int cyc = 0, first_accept = -1, last_valid = 0, found = 0, found_pw = -1;
  int done_cnt [NI];
  int got [NI][$];

  sha1_assp dut (.clk, .rst_n, .start, .ready, .m, .k_len, .hash, .hash_valid);

  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // asynchronous reset pulse
  always @(posedge clk) cyc <= cyc + 1;

  // candidate number -> 6 ASCII digits, left aligned
  function automatic logic [MAXB-1:0] pw(input int v);
    logic [MAXB-1:0] r;
    r = '0;
    for (int d = 0; d < 6; d++) r[MAXB-1-8*d -: 8] = 8'h30 + 8'((v / (10 ** (5 - d))) % 10);
    return r;
  endfunction

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic feed(input int c);
    logic [MAXB-1:0] msg;
    for (int i = 0; i < PER_CORE && c * PER_CORE + i < NCAND; i++) begin
      msg = pw(c * PER_CORE + i);
      @(negedge clk);
      m[c] = msg[MAXB-1 -: MSG_W];
      k_len[c] = 11'd48;
      start[c] = 1'b1;
      while (!ready[c]) @(negedge clk);
      if (first_accept < 0) first_accept = cyc + 1;
      got[c].push_back(c * PER_CORE + i);
      @(posedge clk);
      #1 start[c] = 1'b0;
    end
  endtask

  always @(negedge clk) if (rst_n)
    for (int c = 0; c < NI; c++) if (hash_valid[c]) begin
      int cand;
      cand = got[c].pop_front();
      done_cnt[c]++;
      last_valid = cyc;
      if (hash[c] == target) begin found++; found_pw = cand; end
      if (cand % 4096 == 0) chk(hash[c] == sha1_ref(pw(cand), 48), $sformatf("digest of %06d", cand));
    end

  initial begin
    #40000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = '0; m = '0; k_len = '0;
    target = sha1_ref(pw(SECRET), 48);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < NI; c++)
      fork
        automatic int cc = c;
        feed(cc);
      join_none
    wait fork;
    for (int c = 0; c < NI; c++) wait (done_cnt[c] == ((c + 1) * PER_CORE <= NCAND ? PER_CORE : NCAND - c * PER_CORE));
    @(negedge clk);
    chk(found == 1, $sformatf("matches found: %0d", found));
    chk(found_pw == SECRET, $sformatf("recovered %06d, expected %06d", found_pw, SECRET));
    chk(last_valid - first_accept == PER_CORE * 80,
        $sformatf("search took %0d clocks, expected %0d", last_valid - first_accept, PER_CORE * 80));
    $display("searched %0d candidates in %0d clocks on %0d cores", NCAND, last_valid - first_accept, NI);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
