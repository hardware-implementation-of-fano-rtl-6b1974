// operand_mux: index multiplexers between the decoder's vectors and the BMU.
//
// At search depth i (the current node has decided bits 0..i-1) it selects
// z_i, b_i and a_i for the branch being examined, and z_{i-1}, b_{i-1},
// u_{i-1} for the branch that led to the current node.  It also provides
// a_{i-1} (whether the previous node N4 is frozen) to the control unit.
// Out-of-range selections (index -1 at the root, index N at the end) read as
// zero.  Purely combinational.  The z, b, a and u selections are the
// multiplexers of the published block diagram; the a_{i-1} output is added by
// this design for the control unit's frozen-parent test.
module operand_mux #(
  parameter int unsigned N = pac_pkg::N_DEF,
  parameter int unsigned Q = pac_pkg::Q_DEF,
  localparam int unsigned LOGN = $clog2(N)
) (
  input  logic [LOGN:0]       i,
  input  logic signed [Q-1:0] z [N],
  input  logic [N-1:0]        b,
  input  logic [N-1:0]        a,
  input  logic [N-1:0]        u,
  output logic signed [Q-1:0] z_i,
  output logic signed [Q-1:0] z_im1,
  output logic                b_i,
  output logic                b_im1,
  output logic                a_i,
  output logic                a_im1,
  output logic                u_im1
);
  logic [LOGN-1:0] cur, prv;
  logic            cur_ok, prv_ok;

  always_comb begin
    cur    = i[LOGN-1:0];
    prv    = cur - 1'b1;
    cur_ok = (i < (LOGN+1)'(N));
    prv_ok = (i != '0);
    z_i    = cur_ok ? z[cur] : '0;
    b_i    = cur_ok ? b[cur] : 1'b0;
    a_i    = cur_ok ? a[cur] : 1'b0;
    z_im1  = prv_ok ? z[prv] : '0;
    b_im1  = prv_ok ? b[prv] : 1'b0;
    a_im1  = prv_ok ? a[prv] : 1'b0;
    u_im1  = prv_ok ? u[prv] : 1'b0;
  end
endmodule
