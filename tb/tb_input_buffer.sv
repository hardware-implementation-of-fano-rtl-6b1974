// tb_input_buffer: writes random LLRs in random order through the load port
// and checks the parallel read-out against a model array.
module tb_input_buffer;
  localparam int N = 128, Q = 7;
  logic clk = 0, rst_n = 0, we = 0;
  logic [6:0] waddr = '0;
  logic signed [Q-1:0] wdata = '0;
  logic signed [Q-1:0] llr [N];
  int model [N];
  int checks = 0, failures = 0;

  input_buffer #(.N(N), .Q(Q)) dut (.clk, .rst_n, .we, .waddr, .wdata, .llr);
  always #1 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int j = 0; j < N; j++) model[j] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      int ad, d;
      ad = $urandom_range(N - 1);
      d = $urandom_range(127) - 64;
      we = 1'($urandom_range(3) != 0);
      waddr = 7'(ad); wdata = Q'(d);
      @(negedge clk);
      if (we) model[ad] = d;
      checks++;
      for (int j = 0; j < N; j++) if (int'(llr[j]) != model[j]) begin
        failures++;
        $display("FAIL entry %0d = %0d, expected %0d", j, llr[j], model[j]);
        break;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
