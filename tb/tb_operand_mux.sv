// tb_operand_mux: random vectors and every depth 0..N; checks each selected
// operand, including the zero values at the ends of the range.
module tb_operand_mux;
  localparam int N = 128, Q = 7;
  logic [7:0] i;
  logic signed [Q-1:0] z [N];
  logic [N-1:0] b, a, u;
  logic signed [Q-1:0] z_i, z_im1;
  logic b_i, b_im1, a_i, a_im1, u_im1;
  int checks = 0, failures = 0;

  operand_mux #(.N(N), .Q(Q)) dut (.i, .z, .b, .a, .u, .z_i, .z_im1, .b_i, .b_im1, .a_i, .a_im1, .u_im1);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 5; n++) begin
      for (int j = 0; j < N; j++) begin
        z[j] = Q'($urandom); b[j] = 1'($urandom); a[j] = 1'($urandom); u[j] = 1'($urandom);
      end
      for (int d = 0; d <= N; d++) begin
        bit ok;
        i = 8'(d);
        #1;
        ok = 1;
        if (d < N) begin
          if (z_i != z[d] || b_i != b[d] || a_i != a[d]) ok = 0;
        end else if (z_i != 0 || b_i != 0 || a_i != 0) ok = 0;
        if (d > 0) begin
          if (z_im1 != z[d-1] || b_im1 != b[d-1] || a_im1 != a[d-1] || u_im1 != u[d-1]) ok = 0;
        end else if (z_im1 != 0 || b_im1 != 0 || a_im1 != 0 || u_im1 != 0) ok = 0;
        checks++;
        if (!ok) begin
          failures++;
          $display("FAIL depth %0d", d);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
