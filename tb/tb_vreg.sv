// tb_vreg: random forward/backward shifting of the v register against a
// stack model: forward pushes a bit, backward pops one.  Checks the full
// contents (latest bit in position 0, zeros below the start) and CS.
module tb_vreg;
  localparam int N = 128, H = 6;
  logic clk = 0, rst_n = 0, clr = 0, fwd = 0, bwd = 0, v_in = 0;
  logic [N+H-1:0] q;
  logic [H-1:0] cs;
  bit stack [$];
  int checks = 0, failures = 0;

  vreg #(.N(N), .H(H)) dut (.clk, .rst_n, .clr, .fwd, .bwd, .v_in, .q, .cs);
  always #1 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      int r;
      bit ok;
      r = $urandom_range(9);
      clr = (r == 0) && ($urandom_range(20) == 0);
      fwd = !clr && (r >= 4) && (stack.size() < N);
      bwd = !clr && !fwd && (r >= 1) && (stack.size() > 0);
      v_in = 1'($urandom);
      @(negedge clk);
      if (clr) stack.delete();
      else if (fwd) stack.push_back(v_in);
      else if (bwd) void'(stack.pop_back());
      ok = 1;
      for (int j = 0; j < N + H; j++) begin
        bit e;
        e = (j < stack.size()) ? stack[stack.size() - 1 - j] : 1'b0;
        if (q[j] != e) ok = 0;
      end
      if (cs != q[H-1:0]) ok = 0;
      checks++;
      if (!ok) begin
        failures++;
        $display("FAIL step %0d depth %0d", n, stack.size());
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
