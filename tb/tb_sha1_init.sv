// tb_sha1_init: checks the padding and length insertion for lengths around
// every boundary (0, 447, 448, 511, 512, 959, 960, 1983 and random ones), the
// number of blocks L_i, h0, and the loop handshake: load only when ready, run
// held until the last round of the last block, ready during that round.
module tb_sha1_init;
  import sha1_ref_pkg::*;
  localparam int L = 4, ZW = 2048, MSG_W = ZW - 65;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1, start = 0, last_round = 0;
  logic [MSG_W-1:0] m;
  logic [10:0] k_len;
  logic [1:0] j;
  logic ready, load, run, last_blk, done;
  logic [ZW-1:0] z;
  logic [2:0] nblk;
  logic [159:0] h0;
  logic [MAXB-1:0] msg, zr;
  int lens [10] = '{0, 1, 447, 448, 511, 512, 959, 960, 1983, 1000};

  sha1_init #(.L(L)) dut (.clk, .rst_n, .start, .ready, .m, .k_len, .j, .last_round,
                          .load, .run, .last_blk, .done, .z, .nblk, .h0);

  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // asynchronous reset pulse

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #1000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(h0 == 160'h67452301EFCDAB8998BADCFE10325476C3D2E1F0, "h0");
    chk(ready && !run, "idle ready");
    for (int t = 0; t < 30; t++) begin
      int k;
      k = (t < 10) ? lens[t] : int'($urandom % (MSG_W + 1));
      msg = rand_msg();
      m = msg[MAXB-1 -: MSG_W];
      k_len = 11'(k);
      start = 1; j = 0; last_round = 0;
      #1 chk(load, "load on start");
      @(negedge clk);
      start = 0;
      zr = pad(msg, k);
      chk(z == zr[MAXB-1 -: ZW], $sformatf("z for K=%0d", k));
      chk(32'(nblk) == nblocks(k), $sformatf("L_i for K=%0d: %0d", k, nblk));
      chk(run && !ready, "running");
      // walk the blocks: last_round only in the final round of each block
      for (int b = 0; b < nblocks(k); b++) begin
        j = 2'(b);
        last_round = 0; #1;
        chk(!done && !ready && run, "mid-block");
        start = 1; #1;
        chk(!load, "no load while busy");
        start = 0;
        last_round = 1; #1;
        chk(done == (b == nblocks(k) - 1), "done at last block");
        chk(last_blk == (b == nblocks(k) - 1), "last_blk");
        chk(ready == done, "ready in final round");
        @(negedge clk);
      end
      last_round = 0; #1;
      chk(!run && ready, "idle after message");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
