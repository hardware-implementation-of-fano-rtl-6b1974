// tb_ureg: random addressed writes and clears of the u register against a
// model vector.
module tb_ureg;
  localparam int N = 128;
  logic clk = 0, rst_n = 0, clr = 0, we = 0, d = 0;
  logic [6:0] idx = '0;
  logic [N-1:0] q, model;
  int checks = 0, failures = 0;

  ureg #(.N(N)) dut (.clk, .rst_n, .clr, .we, .idx, .d, .q);
  always #1 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    model = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      clr = ($urandom_range(200) == 0);
      we = 1'($urandom);
      idx = 7'($urandom);
      d = 1'($urandom);
      @(negedge clk);
      if (clr) model = '0;
      else if (we) model[idx] = d;
      checks++;
      if (q != model) begin
        failures++;
        $display("FAIL step %0d", n);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
