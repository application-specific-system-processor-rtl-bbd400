// tb_sha1_hupd: checks a hash-word register (HC, initial word 0x98BADCFE):
// reset and load give the initial word, upd adds x modulo 2^32, sum is h + x.
module tb_sha1_hupd;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1, load = 0, upd = 0;
  logic [31:0] x, h, sum, mh;

  sha1_hupd #(.INIT(32'h98BADCFE)) dut (.clk, .rst_n, .load, .upd, .x, .h, .sum);

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
    #2;
    checks++;
    if (h !== 32'h98BADCFE) begin failures++; $display("FAIL reset value %h", h); end
    rst_n = 1;
    mh = 32'h98BADCFE;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      load = ($urandom % 8) == 0;
      upd  = ($urandom % 2) == 0;
      x = $urandom;
      #1;
      checks++;
      if (sum !== mh + x) begin failures++; $display("FAIL sum"); end
      @(posedge clk);
      if (load) mh = 32'h98BADCFE;
      else if (upd) mh = mh + x;
      #1;
      checks++;
      if (h !== mh) begin failures++; $display("FAIL t=%0d h=%h exp=%h", t, h, mh); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
