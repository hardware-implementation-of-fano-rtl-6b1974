// tb_bmu: random test of the branch metric unit against a direct model:
// u_i = a_i ? sign(z_i) XOR t_i : u_{i,0}; v_i = u_i XOR u_{i,0};
// M23 = gamma_i(u_i), M1 = gamma_{i-1}(u_{i-1}), with the tabulated metric.
module tb_bmu;
  localparam int Q = 7, H = 6;
  logic signed [Q-1:0] z_i, z_im1, m1, m23;
  logic b_i, b_im1, u_im1, t_i, a_i, v_i, u_i;
  logic [H-1:0] cs;
  int checks = 0, failures = 0;
  int c [7] = '{1, 0, 1, 1, 0, 1, 1};

  bmu #(.Q(Q), .H(H)) dut (.z_i, .b_i, .z_im1, .b_im1, .u_im1, .cs, .t_i, .a_i, .m1, .m23, .v_i, .u_i);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int gam(input int zz, input int bb, input int u);
    int mag;
    mag = (zz < 0) ? -zz : zz;
    if (mag > 63) mag = 63;
    if (u == int'(zz < 0)) return 1 - bb;
    return 1 - mag - bb;
  endfunction

  initial begin
    for (int n = 0; n < 4000; n++) begin
      int u0, eu, ev;
      z_i = Q'($urandom); z_im1 = Q'($urandom);
      b_i = 1'($urandom); b_im1 = 1'($urandom); u_im1 = 1'($urandom);
      t_i = 1'($urandom); a_i = 1'($urandom); cs = H'($urandom);
      #1;
      u0 = 0;
      for (int j = 1; j <= H; j++) u0 ^= c[j] & int'(cs[j-1]);
      eu = a_i ? (int'(z_i < 0) ^ int'(t_i)) : u0;
      ev = eu ^ u0;
      checks++;
      if (int'(u_i) != eu || int'(v_i) != ev || int'(m23) != gam(int'(z_i), int'(b_i), eu) ||
          int'(m1) != gam(int'(z_im1), int'(b_im1), int'(u_im1))) begin
        failures++;
        $display("FAIL z=%0d b=%0d t=%0d a=%0d cs=%b -> u=%0d v=%0d m23=%0d m1=%0d", z_i, b_i, t_i, a_i, cs, u_i, v_i, m23, m1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
