// tb_sha1_gf: checks f for all four round groups on random B, C, D against a
// bit-by-bit truth-table model (choose, parity, majority, parity).
module tb_sha1_gf;
  int checks = 0, failures = 0;
  logic [31:0] b, c, d, f, e;
  logic [1:0]  v;

  sha1_gf dut (.b, .c, .d, .v, .f);

  initial begin
    #10000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 400; i++) begin
      b = $urandom; c = $urandom; d = $urandom; v = 2'(i % 4);
      #1;
      for (int x = 0; x < 32; x++)
        case (v)
          2'd0:    e[x] = b[x] ? c[x] : d[x];
          2'd2:    e[x] = (32'(b[x]) + 32'(c[x]) + 32'(d[x])) >= 2;
          default: e[x] = ((32'(b[x]) + 32'(c[x]) + 32'(d[x])) % 2) == 1;
        endcase
      checks++;
      if (f !== e) begin
        failures++;
        $display("FAIL v=%0d b=%h c=%h d=%h f=%h exp=%h", v, b, c, d, f, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
