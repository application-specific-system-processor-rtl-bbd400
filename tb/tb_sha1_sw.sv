// tb_sha1_sw: checks one SWk unit (K = 16 and K = 40): RWk takes
// lr(w3^w8^w14^w16, 1) only in the clock where n = K-3 and holds it otherwise.
module tb_sha1_sw;
  import sha1_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic [6:0]  n;
  logic [31:0] w3, w8, w14, w16, sw16, sw40;
  logic [31:0] exp16, exp40;

  sha1_sw #(.K(16)) dut16 (.clk, .n, .w3, .w8, .w14, .w16, .sw(sw16));
  sha1_sw #(.K(40)) dut40 (.clk, .n, .w3, .w8, .w14, .w16, .sw(sw40));

  always #5 clk = ~clk;

  initial begin
    #100000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int rep = 0; rep < 4; rep++)
      for (int i = 0; i < 80; i++) begin
        n = 7'(i);
        w3 = $urandom; w8 = $urandom; w14 = $urandom; w16 = $urandom;
        @(posedge clk);
        if (i == 13) exp16 = rol(w3 ^ w8 ^ w14 ^ w16, 1);
        if (i == 37) exp40 = rol(w3 ^ w8 ^ w14 ^ w16, 1);
        #1;
        if (rep > 0 || i >= 13) begin
          checks++;
          if (sw16 !== exp16) begin failures++; $display("FAIL K=16 n=%0d sw=%h exp=%h", i, sw16, exp16); end
        end
        if (rep > 0 || i >= 37) begin
          checks++;
          if (sw40 !== exp40) begin failures++; $display("FAIL K=40 n=%0d sw=%h exp=%h", i, sw40, exp40); end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
