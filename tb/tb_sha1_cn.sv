// tb_sha1_cn: checks the round counter: reset to 0, counts 0..79 and wraps,
// holds while en is low, clears on clr, and flags last only at n = 79.
module tb_sha1_cn;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 1, clr = 0, en = 0;
  logic [6:0] n;
  logic last;
  int model;

  sha1_cn dut (.clk, .rst_n, .clr, .en, .n, .last);

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
    model = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 600; c++) begin
      @(negedge clk);
      checks++;
      if (n !== 7'(model) || last !== (model == 79)) begin
        failures++;
        $display("FAIL cycle %0d n=%0d last=%0b exp=%0d", c, n, last, model);
      end
      en  = (c % 37) != 5;
      clr = (c == 300);
      @(posedge clk);
      if (clr) model = 0;
      else if (en) model = (model == 79) ? 0 : model + 1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
