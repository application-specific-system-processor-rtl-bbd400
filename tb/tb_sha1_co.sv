// tb_sha1_co: checks that the output stage captures {ha,hb,hc,hd,he} in that
// order on capture, pulses valid the next cycle only, and holds the hash.
module tb_sha1_co;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1, capture = 0, valid;
  logic [31:0] ha, hb, hc, hd, he;
  logic [159:0] hash, mh;

  sha1_co dut (.clk, .rst_n, .capture, .ha, .hb, .hc, .hd, .he, .hash, .valid);

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
    mh = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      capture = ($urandom % 3) == 0;
      ha = $urandom; hb = $urandom; hc = $urandom; hd = $urandom; he = $urandom;
      @(posedge clk);
      if (capture) mh = {ha, hb, hc, hd, he};
      #1;
      checks++;
      if (hash !== mh || valid !== capture) begin
        failures++;
        $display("FAIL t=%0d hash=%h exp=%h valid=%0b", t, hash, mh, valid);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
