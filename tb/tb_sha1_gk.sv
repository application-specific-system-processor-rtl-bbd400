// tb_sha1_gk: checks the four SHA-1 round constants selected by v.
module tb_sha1_gk;
  int checks = 0, failures = 0;
  logic [1:0]  v;
  logic [31:0] k;
  logic [31:0] exp_k [4] = '{32'h5A827999, 32'h6ED9EBA1, 32'h8F1BBCDC, 32'hCA62C1D6};

  sha1_gk dut (.v, .k);

  initial begin
    #1000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 2; r++)
      for (int i = 0; i < 4; i++) begin
        v = 2'(i); #1;
        checks++;
        if (k !== exp_k[i]) begin
          failures++;
          $display("FAIL v=%0d k=%h", i, k);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
