// tb_cc_counter: counts with random enable gaps and checks the count each
// cycle, that TO rises exactly when the count first exceeds MC, and that clr
// restarts the count.
module tb_cc_counter;
  localparam int CCW = 20;
  logic clk = 0, rst_n = 0, clr = 0, en = 0, to;
  logic [CCW-1:0] mc, count;
  int model = 0;
  int checks = 0, failures = 0;

  cc_counter #(.CCW(CCW)) dut (.clk, .rst_n, .clr, .en, .mc, .count, .to);
  always #1 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mc = CCW'(37);
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      clr = (n % 100 == 0);
      en = ($urandom_range(3) != 0);
      if (n == 200) mc = CCW'(5);
      @(negedge clk);
      if (clr) model = 0;
      else if (en) model++;
      checks++;
      if (int'(count) != model || to != (model > int'(mc))) begin
        failures++;
        $display("FAIL step %0d count=%0d model=%0d to=%0d", n, count, model, to);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
