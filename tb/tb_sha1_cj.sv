// tb_sha1_cj: checks the block counter for L = 4 and L = 3: increments on
// inc, wraps after L-1, clears on clr.
module tb_sha1_cj;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1, clr = 0, inc = 0;
  logic [1:0] j4, j3;
  int m4, m3;

  sha1_cj #(.L(4)) dut4 (.clk, .rst_n, .clr, .inc, .j(j4));
  sha1_cj #(.L(3)) dut3 (.clk, .rst_n, .clr, .inc, .j(j3));

  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // asynchronous reset pulse

  initial begin
    #100000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    m4 = 0; m3 = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 200; c++) begin
      @(negedge clk);
      checks++;
      if (j4 !== 2'(m4) || j3 !== 2'(m3)) begin
        failures++;
        $display("FAIL cycle %0d j4=%0d (%0d) j3=%0d (%0d)", c, j4, m4, j3, m3);
      end
      inc = ($urandom % 3) != 0;
      clr = (c % 50) == 49;
      @(posedge clk);
      if (clr) begin m4 = 0; m3 = 0; end
      else if (inc) begin m4 = (m4 + 1) % 4; m3 = (m3 + 1) % 3; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
