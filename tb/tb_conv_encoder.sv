// tb_conv_encoder: exhaustive check of u_{i,0} for all convolution states,
// against the generator c = (1,0,1,1,0,1,1) written out as a list here.
module tb_conv_encoder;
  localparam int H = 6;
  logic [H-1:0] cs;
  logic u0;
  int checks = 0, failures = 0;
  int c [7] = '{1, 0, 1, 1, 0, 1, 1};

  conv_encoder #(.H(H)) dut (.cs(cs), .u0(u0));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < 64; s++) begin
      int e;
      cs = H'(s);
      #1;
      e = 0;
      for (int j = 1; j <= H; j++) e ^= c[j] & ((s >> (j - 1)) & 1);
      checks++;
      if (int'(u0) != e) begin
        failures++;
        $display("FAIL cs=%b u0=%0d expected %0d", cs, u0, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
