// pac_fano_decoder: Fano sequential decoder for PAC (polarization-adjusted
// convolutional) codes, N = 128, Q = 7-bit LLRs, generator c = (1,0,1,1,0,1,1).
//
// A PAC codeword is x = v G F^{(x)n}: the carrier word v (data in the
// positions where a = 1, zeros elsewhere) is convolved with c and then polar
// transformed.  The decoder searches the convolutional code tree with the Fano
// algorithm.  The polar demapper turns the channel LLRs and the decided bits
// u^{i-1} into the bit-channel LLR z_i; the branch metric unit turns z_i and
// the bias bit b_i into the metric of the examined branch without a
// comparator; the Fano control unit decides forward and backward moves.  Vreg
// (decided v, also the convolution state) and Ureg (decided u) follow the
// search, and the CC counter bounds a session to MC cycles.
//
// Interface: load the N channel LLRs through llr_we/llr_addr/llr_data while
// idle (LLR > 0 favours bit 0), hold a (frozen map, 1 = data), b (bias bits),
// delta (threshold spacing) and mc (cycle budget) steady, pulse start.  busy
// stays high while decoding; done pulses for one cycle when the word is in
// v_hat (v_hat[j] = v_j) together with the cycle count and the timeout flag.
// rule/rule_valid expose the rule applied in each iteration for monitoring.
// Without backtracking a frame takes 5N-2 cycles.  The load port, the
// start/done handshake and the monitoring outputs are this design's own.
module pac_fano_decoder #(
  parameter int unsigned N   = pac_pkg::N_DEF,
  parameter int unsigned Q   = pac_pkg::Q_DEF,
  parameter int unsigned H   = pac_pkg::H_DEF,
  parameter int unsigned MW  = pac_pkg::MW,
  parameter int unsigned CCW = pac_pkg::CCW,
  localparam int unsigned LOGN = $clog2(N)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 llr_we,
  input  logic [LOGN-1:0]      llr_addr,
  input  logic signed [Q-1:0]  llr_data,
  input  logic [N-1:0]         a,
  input  logic [N-1:0]         b,
  input  logic signed [MW-1:0] delta,
  input  logic [CCW-1:0]       mc,
  input  logic                 start,
  output logic                 busy,
  output logic                 done,
  output logic [N-1:0]         v_hat,
  output logic [CCW-1:0]       cycles,
  output logic                 to,
  output pac_pkg::rule_e       rule,
  output logic                 rule_valid
);
  logic signed [Q-1:0] llr [N];
  logic signed [Q-1:0] z [N];
  logic [N-1:0]        u_q;
  logic [N+H-1:0]      v_q;
  logic [H-1:0]        cs;
  logic [LOGN:0]       depth;
  logic signed [Q-1:0] z_i, z_im1, m1, m23;
  logic                b_i, b_im1, a_i, a_im1, u_im1, t_i, v_i, u_i;
  logic                pd_start, pd_done, pd_busy;
  logic [LOGN-1:0]     pd_idx, ureg_idx;
  logic                clr, vreg_fwd, vreg_bwd, v_out, ureg_we, u_out, cnt_en;
  logic [CCW-1:0]      count;
  logic                cc_to, capture;

  input_buffer #(.N(N), .Q(Q)) u_ibuf (
    .clk, .rst_n, .we(llr_we), .waddr(llr_addr), .wdata(llr_data), .llr(llr));

  polar_demapper #(.N(N), .Q(Q)) u_pd (
    .clk, .rst_n, .start(pd_start), .idx(pd_idx), .llr(llr), .u(u_q),
    .busy(pd_busy), .done(pd_done), .z(z));

  operand_mux #(.N(N), .Q(Q)) u_mux (
    .i(depth), .z(z), .b(b), .a(a), .u(u_q), .z_i(z_i), .z_im1(z_im1),
    .b_i(b_i), .b_im1(b_im1), .a_i(a_i), .a_im1(a_im1), .u_im1(u_im1));

  bmu #(.Q(Q), .H(H)) u_bmu (
    .z_i(z_i), .b_i(b_i), .z_im1(z_im1), .b_im1(b_im1), .u_im1(u_im1), .cs(cs),
    .t_i(t_i), .a_i(a_i), .m1(m1), .m23(m23), .v_i(v_i), .u_i(u_i));

  fcu #(.N(N), .Q(Q), .MW(MW)) u_fcu (
    .clk, .rst_n, .start, .delta, .to(cc_to), .m1(m1), .m23(m23), .v_i(v_i), .u_i(u_i),
    .a_im1(a_im1), .u_im1(u_im1), .z_im1(z_im1), .t_i(t_i), .depth(depth),
    .pd_start(pd_start), .pd_idx(pd_idx), .pd_done(pd_done), .clr(clr),
    .vreg_fwd(vreg_fwd), .vreg_bwd(vreg_bwd), .v_out(v_out), .ureg_we(ureg_we),
    .ureg_idx(ureg_idx), .u_out(u_out), .cnt_en(cnt_en), .busy(busy), .finish(capture), .done(done),
    .rule_applied(rule), .rule_valid(rule_valid));

  vreg #(.N(N), .H(H)) u_vreg (
    .clk, .rst_n, .clr(clr), .fwd(vreg_fwd), .bwd(vreg_bwd), .v_in(v_out), .q(v_q), .cs(cs));

  ureg #(.N(N)) u_ureg (
    .clk, .rst_n, .clr(clr), .we(ureg_we), .idx(ureg_idx), .d(u_out), .q(u_q));

  cc_counter #(.CCW(CCW)) u_cc (
    .clk, .rst_n, .clr(clr), .en(cnt_en), .mc(mc), .count(count), .to(cc_to));

  // The output buffer captures in the last working cycle of a session (done
  // is registered one cycle later); Vreg is taken with the final shift applied.
  output_buffer #(.N(N), .H(H), .CCW(CCW)) u_obuf (
    .clk, .rst_n, .capture(capture), .vreg(vreg_fwd ? {v_q[N+H-2:0], v_out} : v_q),
    .cycles_in(count + 1'b1), .to_in(cc_to), .v_hat(v_hat), .cycles(cycles), .to(to));

  // The demapper reads Ureg while it works, so Ureg must not change then.
  a_ureg_stable: assert property (@(posedge clk) ureg_we |-> !pd_busy);
endmodule
