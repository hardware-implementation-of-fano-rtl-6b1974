// conv_encoder: convolution output for the hypothesis v_i = 0.
//
// The PAC convolution is u_i = XOR_{j=0..h} c_j v_{i-j}.  With v_i = 0 only the
// convolution state CS (the h previously decided v bits, cs[j-1] = v_{i-j})
// contributes: u_{i,0} = XOR_{j=1..h} c_j v_{i-j}.  Because c_0 = 1 the actual
// output for any v_i is u_{i,0} XOR v_i, which the branch metric unit uses.
// Combinational; the generator comes from pac_pkg::C_POLY.  The encoder and
// its place in the branch metric unit follow the published architecture; the
// XOR-sum form is the direct reading of the convolution.
module conv_encoder #(
  parameter int unsigned H = pac_pkg::H_DEF
) (
  input  logic [H-1:0] cs,
  output logic         u0
);
  always_comb begin
    u0 = 1'b0;
    for (int j = 1; j <= int'(H); j++) u0 ^= pac_pkg::C_POLY[j] & cs[j-1];
  end
endmodule
