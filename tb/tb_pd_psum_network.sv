// tb_pd_psum_network: random check of the partial-sum network.  For every
// stage k and position j the expected bit is the F^{(x)k} encoding of the
// aligned 2^k block of u, computed with the subset rule
// x_r = XOR over m whose bits cover r of u_m.
module tb_pd_psum_network;
  localparam int N = 128, LOGN = 7;
  logic [N-1:0] u;
  logic [N-1:0] ps [LOGN];
  int checks = 0, failures = 0;

  pd_psum_network #(.N(N)) dut (.u(u), .ps(ps));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 50; n++) begin
      for (int j = 0; j < N; j++) u[j] = 1'($urandom);
      #1;
      for (int k = 0; k < LOGN; k++) begin
        bit ok;
        ok = 1;
        for (int j = 0; j < N; j++) begin
          int base, r;
          bit e;
          base = (j >> k) << k;
          r = j - base;
          e = 0;
          for (int m = 0; m < (1 << k); m++) if ((m & r) == r) e ^= u[base + m];
          if (ps[k][j] != e) ok = 0;
        end
        checks++;
        if (!ok) begin
          failures++;
          $display("FAIL stage %0d", k);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
