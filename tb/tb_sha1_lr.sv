// tb_sha1_lr: checks the constant rotators LR1, LR5 and LR30 against a
// bit-by-bit rotation on fixed and random words.
module tb_sha1_lr;
  import sha1_ref_pkg::*;
  int checks = 0, failures = 0;
  logic [31:0] r, y1, y5, y30;

  sha1_lr #(.S(1))  dut1  (.r, .y(y1));
  sha1_lr #(.S(5))  dut5  (.r, .y(y5));
  sha1_lr #(.S(30)) dut30 (.r, .y(y30));

  task automatic check(input logic [31:0] got, exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s r=%h got=%h exp=%h", what, r, got, exp);
    end
  endtask

  initial begin
    #1000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    r = 32'h8000_0001; #1;
    check(y1, 32'h0000_0003, "lr1");
    check(y5, 32'h0000_0030, "lr5");
    check(y30, 32'h6000_0000, "lr30");
    for (int i = 0; i < 200; i++) begin
      r = $urandom; #1;
      check(y1, rol(r, 1), "lr1");
      check(y5, rol(r, 5), "lr5");
      check(y30, rol(r, 30), "lr30");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
