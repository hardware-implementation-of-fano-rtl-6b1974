// tb_pac_pkg: checks the LLR helpers of the package (saturation, min-sum f,
// g) on random operands against integer formulas, and the generator constant.
module tb_pac_pkg;
  import pac_pkg::*;
  int checks = 0, failures = 0;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sat(input int x);
    return (x > 63) ? 63 : ((x < -63) ? -63 : x);
  endfunction

  initial begin
    int c [7] = '{1, 0, 1, 1, 0, 1, 1};
    for (int j = 0; j < 7; j++) begin
      checks++;
      if (int'(C_POLY[j]) != c[j]) failures++;
    end
    for (int n = 0; n < 3000; n++) begin
      int a, b, ef, eg, m;
      bit beta;
      a = $urandom_range(126) - 63;
      b = $urandom_range(126) - 63;
      beta = 1'($urandom);
      m = ((a < 0 ? -a : a) < (b < 0 ? -b : b)) ? (a < 0 ? -a : a) : (b < 0 ? -b : b);
      ef = ((a < 0) ^ (b < 0)) ? -m : m;
      eg = sat(beta ? b - a : b + a);
      checks++;
      if (int'(sat_q(llr_f(16'(a), 16'(b)), 7)) != ef ||
          int'(sat_q(llr_g(16'(a), 16'(b), beta), 7)) != eg) begin
        failures++;
        $display("FAIL a=%0d b=%0d beta=%0d", a, b, beta);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
