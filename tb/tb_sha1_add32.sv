// tb_sha1_add32: checks the 32-bit adder (S1..S4) for wrap-around and random
// operands against a 33-bit sum truncated to 32 bits.
module tb_sha1_add32;
  int checks = 0, failures = 0;
  logic [31:0] a, b, s;
  logic [32:0] ref_s;

  sha1_add32 dut (.a, .b, .s);

  initial begin
    #10000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 500; i++) begin
      case (i)
        0: begin a = 32'hFFFF_FFFF; b = 32'h1; end
        1: begin a = 32'h8000_0000; b = 32'h8000_0000; end
        default: begin a = $urandom; b = $urandom; end
      endcase
      #1;
      ref_s = {1'b0, a} + {1'b0, b};
      checks++;
      if (s !== ref_s[31:0]) begin
        failures++;
        $display("FAIL a=%h b=%h s=%h", a, b, s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
