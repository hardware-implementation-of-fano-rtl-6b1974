// tb_output_buffer: captures random Vreg contents and checks that v_hat is
// the reversed first N bits, that the count and flag follow, and that the
// outputs hold while capture is low.
module tb_output_buffer;
  localparam int N = 128, H = 6, CCW = 20;
  logic clk = 0, rst_n = 0, capture = 0, to_in = 0, to;
  logic [N+H-1:0] vreg = '0;
  logic [CCW-1:0] cycles_in = '0, cycles;
  logic [N-1:0] v_hat, exp_v;
  logic [CCW-1:0] exp_c;
  logic exp_t;
  int checks = 0, failures = 0;

  output_buffer #(.N(N), .H(H), .CCW(CCW)) dut (.clk, .rst_n, .capture, .vreg, .cycles_in, .to_in, .v_hat, .cycles, .to);
  always #1 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    exp_v = '0; exp_c = '0; exp_t = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      for (int j = 0; j < N + H; j++) vreg[j] = 1'($urandom);
      cycles_in = CCW'($urandom);
      to_in = 1'($urandom);
      capture = 1'($urandom);
      @(negedge clk);
      if (capture) begin
        for (int j = 0; j < N; j++) exp_v[j] = vreg[N-1-j];
        exp_c = cycles_in;
        exp_t = to_in;
      end
      checks++;
      if (v_hat != exp_v || cycles != exp_c || to != exp_t) begin
        failures++;
        $display("FAIL at step %0d", n);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
