// tb_sha1_gw: drives random blocks u[0..15] for 80 clocks each with n
// counting 0..79 and checks that w[n] equals the SHA-1 schedule word W_n
// computed by the reference recurrence, in every round.
module tb_sha1_gw;
  import sha1_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic [6:0] n;
  logic [15:0][31:0] u;
  logic [31:0] w;
  logic [31:0] ws [80];

  sha1_gw dut (.clk, .n, .u, .w);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int blk = 0; blk < 6; blk++) begin
      for (int i = 0; i < 16; i++) begin
        u[i] = $urandom; ws[i] = u[i];
      end
      for (int i = 16; i < 80; i++) ws[i] = rol(ws[i-3] ^ ws[i-8] ^ ws[i-14] ^ ws[i-16], 1);
      for (int i = 0; i < 80; i++) begin
        n = 7'(i);
        #1;
        checks++;
        if (w !== ws[i]) begin
          failures++;
          $display("FAIL blk=%0d n=%0d w=%h exp=%h", blk, i, w, ws[i]);
        end
        @(posedge clk); #1;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
