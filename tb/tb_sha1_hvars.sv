// tb_sha1_hvars: checks the RA..RE registers: init loads all five words,
// step shifts B<-A, C<-c_new, D<-C, E<-D and A<-a_new, nothing moves otherwise,
// and init wins over step.
module tb_sha1_hvars;
  int checks = 0, failures = 0;
  logic clk = 0, init = 0, step = 0;
  logic [159:0] init_val;
  logic [31:0] a_new, c_new, a, b, c, d, e;
  logic [31:0] ma, mb, mc, md, me;

  sha1_hvars dut (.clk, .init, .init_val, .step, .a_new, .c_new, .a, .b, .c, .d, .e);

  always #5 clk = ~clk;

  initial begin
    #100000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      init = (t == 0) || (($urandom % 10) == 0);
      step = ($urandom % 4) != 0;
      init_val = {$urandom, $urandom, $urandom, $urandom, $urandom};
      a_new = $urandom; c_new = $urandom;
      @(posedge clk);
      if (init) {ma, mb, mc, md, me} = init_val;
      else if (step) begin
        me = md; md = mc; mc = c_new; mb = ma; ma = a_new;
      end
      #1;
      checks++;
      if ({a, b, c, d, e} !== {ma, mb, mc, md, me}) begin
        failures++;
        $display("FAIL t=%0d", t);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
