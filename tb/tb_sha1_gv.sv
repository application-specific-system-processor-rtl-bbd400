// tb_sha1_gv: walks n = 0..79 and checks the round group v = n/20.
module tb_sha1_gv;
  int checks = 0, failures = 0;
  logic [6:0] n;
  logic [1:0] v;

  sha1_gv dut (.n, .v);

  initial begin
    #1000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 80; i++) begin
      n = 7'(i); #1;
      checks++;
      if (v !== 2'(i / 20)) begin
        failures++;
        $display("FAIL n=%0d v=%0d", i, v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
