// tb_metric_calculator: exhaustive check of the branch metric table.
// Every Q-bit z and both bias values are applied; the expected metrics come
// from the closed form gamma(u) = 1 - b if u equals the sign of z, else
// 1 - min(|z|, 2^(Q-1)-1) - b.
module tb_metric_calculator;
  localparam int Q = 7;
  logic signed [Q-1:0] z, g0, g1;
  logic b;
  int checks = 0, failures = 0;

  metric_calculator #(.Q(Q)) dut (.z(z), .b(b), .gamma0(g0), .gamma1(g1));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int expect_g(input int zz, input int bb, input int u);
    int mag;
    mag = (zz < 0) ? -zz : zz;
    if (mag > 63) mag = 63;
    if (u == int'(zz < 0)) return 1 - bb;
    return 1 - mag - bb;
  endfunction

  initial begin
    for (int zz = -64; zz < 64; zz++) begin
      for (int bb = 0; bb < 2; bb++) begin
        z = Q'(zz);
        b = 1'(bb);
        #1;
        checks += 2;
        if (int'(g0) != expect_g(zz, bb, 0) || int'(g1) != expect_g(zz, bb, 1)) begin
          failures++;
          $display("FAIL z=%0d b=%0d g0=%0d g1=%0d", zz, bb, g0, g1);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
