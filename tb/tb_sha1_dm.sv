// tb_sha1_dm: random 2048-bit padded messages; for every block index j the
// sixteen words must be the big-endian 32-bit words of block j.
module tb_sha1_dm;
  int checks = 0, failures = 0;
  logic [2047:0] z;
  logic [1:0] j;
  logic [15:0][31:0] u;
  logic [31:0] e;

  sha1_dm #(.L(4)) dut (.z, .j, .u);

  initial begin
    #10000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 10; t++) begin
      for (int i = 0; i < 64; i++) z[i*32 +: 32] = $urandom;
      for (int b = 0; b < 4; b++) begin
        j = 2'(b); #1;
        for (int i = 0; i < 16; i++) begin
          // stream bits b*512 + i*32 .. +31, first one most significant
          for (int x = 0; x < 32; x++) e[31-x] = z[2047 - (b*512 + i*32 + x)];
          checks++;
          if (u[i] !== e) begin
            failures++;
            $display("FAIL j=%0d i=%0d u=%h exp=%h", b, i, u[i], e);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
