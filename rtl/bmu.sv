// bmu: branch metric unit of the PAC Fano decoder.
//
// Two metric calculators run in parallel.  The first, fed with z_{i-1} and
// b_{i-1}, gives the metric M1 of the branch from the previous node N4 to the
// current node N1; the stored estimate u_{i-1} picks gamma(0) or gamma(1).
// The second, fed with z_i and b_i, gives M23, the metric of the branch being
// examined.  Which branch that is needs no comparator: gamma(0) >= gamma(1)
// exactly when s(z_i) = 0, so the most likely branch is u_i = s(z_i) and the
// least likely one is u_i = s(z_i) XOR 1; the control input t_i selects between
// them.  At a frozen node (a_i = 0) only v_i = 0 is allowed, so u_i is forced to
// the convolution output u_{i,0} computed from the convolution state CS.  The
// chosen information bit is v_i = u_i XOR u_{i,0}.  Purely combinational; the
// decoder registers its outputs for one cycle.
module bmu #(
  parameter int unsigned Q = pac_pkg::Q_DEF,
  parameter int unsigned H = pac_pkg::H_DEF
) (
  input  logic signed [Q-1:0] z_i,
  input  logic                b_i,
  input  logic signed [Q-1:0] z_im1,
  input  logic                b_im1,
  input  logic                u_im1,
  input  logic [H-1:0]        cs,
  input  logic                t_i,
  input  logic                a_i,
  output logic signed [Q-1:0] m1,
  output logic signed [Q-1:0] m23,
  output logic                v_i,
  output logic                u_i
);
  logic signed [Q-1:0] p_g0, p_g1, c_g0, c_g1;
  logic                u0;

  metric_calculator #(.Q(Q)) u_mc_prev (.z(z_im1), .b(b_im1), .gamma0(p_g0), .gamma1(p_g1));
  metric_calculator #(.Q(Q)) u_mc_cur  (.z(z_i),   .b(b_i),   .gamma0(c_g0), .gamma1(c_g1));
  conv_encoder      #(.H(H)) u_enc     (.cs(cs), .u0(u0));

  always_comb begin
    m1  = u_im1 ? p_g1 : p_g0;
    u_i = a_i ? (z_i[Q-1] ^ t_i) : u0;
    m23 = u_i ? c_g1 : c_g0;
    v_i = u_i ^ u0;
  end
endmodule
