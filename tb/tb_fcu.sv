// tb_fcu: directed test of the Fano control unit with a scripted environment.
// The branch metrics and path information the BMU and multiplexers would
// provide are set by hand before each iteration; each step checks the rule
// that fires, the resulting depth, examined-branch select, demapper requests
// and Vreg/Ureg strobes, so that every rule, the backward check, a timeout
// and normal termination at depth N (with a reduced N = 4) are exercised.
module tb_fcu;
  import pac_pkg::*;
  localparam int N = 4, Q = 7, MW = 16;
  logic clk = 0, rst_n = 0, start = 0, to = 0;
  logic signed [MW-1:0] delta = 16'sd2;
  logic signed [Q-1:0] m1 = '0, m23 = '0, z_im1 = '0;
  logic v_i = 0, u_i = 0, a_im1 = 1, u_im1 = 0;
  logic t_i;
  logic [2:0] depth;
  logic pd_start, pd_done = 0, clr, vreg_fwd, vreg_bwd, v_out, ureg_we, u_out, cnt_en, busy, finish, done;
  logic [1:0] pd_idx, ureg_idx;
  rule_e rule_applied;
  logic rule_valid;
  int checks = 0, failures = 0;
  rule_e last_rule;
  int n_rules = 0, n_fwd = 0, n_bwd = 0, n_pd = 0;

  fcu #(.N(N), .Q(Q), .MW(MW)) dut (.clk, .rst_n, .start, .delta, .to, .m1, .m23, .v_i, .u_i,
    .a_im1, .u_im1, .z_im1, .t_i, .depth, .pd_start, .pd_idx, .pd_done, .clr, .vreg_fwd, .vreg_bwd,
    .v_out, .ureg_we, .ureg_idx, .u_out, .cnt_en, .busy, .finish, .done, .rule_applied, .rule_valid);
  always #1 clk = ~clk;

  // The demapper answers one cycle after a request.
  always @(posedge clk) begin
    pd_done <= pd_start;
    if (rule_valid) begin last_rule <= rule_applied; n_rules <= n_rules + 1; end
    if (vreg_fwd) n_fwd <= n_fwd + 1;
    if (vreg_bwd) n_bwd <= n_bwd + 1;
    if (pd_start) n_pd <= n_pd + 1;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Wait for the next rule to be applied, then check it.
  task automatic expect_rule(input rule_e r, input int dep, input bit t_exp, input string what);
    int nb;
    nb = n_rules;
    while (n_rules == nb) @(negedge clk);
    check(last_rule == r, $sformatf("%s: rule %0d, expected %0d", what, last_rule, r));
    check(int'(depth) == dep, $sformatf("%s: depth %0d, expected %0d", what, depth, dep));
    check(t_i == t_exp, $sformatf("%s: t_i %0d, expected %0d", what, t_i, t_exp));
  endtask

  initial begin
    int pd0, f0, b0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // T = 0 at the root. M23 = 1: first visit, 1 < T+Delta -> Rule 1, T = -1.
    m23 = 7'sd1; u_i = 1; v_i = 1;
    start = 1; @(negedge clk); start = 0;
    check(busy, "busy after start");
    expect_rule(RULE1, 1, 0, "step 1");
    check(n_fwd == 1, "forward shift on Rule 1");
    // M23 = 1 >= T + Delta = 1 -> Rule 0, T = -1 + 2 - 1 = 0.
    expect_rule(RULE0, 2, 0, "step 2");
    // M23 = -5 < 0, M1 + T = 1 > 0 -> Rule 2, T = -2; no demapper request.
    m23 = -7'sd5; m1 = 7'sd1;
    pd0 = n_pd;
    expect_rule(RULE2, 2, 0, "step 3");
    // M23 = -5 < -2, M1 + T = -1 <= 0, N4 not frozen, N1 best -> Rule 3, T = -1.
    u_im1 = 0; z_im1 = 7'sd3; a_im1 = 1;
    b0 = n_bwd;
    expect_rule(RULE3, 1, 1, "step 4");
    check(n_bwd == b0 + 1, "backward shift on Rule 3");
    // Now at depth 1: M1 = 0, M23 = -3 < -1, back possible, N1 was the least
    // likely child -> Rule 4, T = -1, Psi = 1.
    m1 = 7'sd0; m23 = -7'sd3; u_im1 = 1;
    expect_rule(RULE4, 0, 1, "step 5");
    // Psi = 1 at the root -> Rule 2, T = -3.
    expect_rule(RULE2, 0, 0, "step 6");
    check(n_pd == pd0, "no demapper request after Rules 2-4");
    // Forward again with M23 = 0 >= -3: not a first visit (T + Delta <= 0) -> Rule 1.
    m23 = 7'sd0;
    expect_rule(RULE1, 1, 0, "step 7");
    // Timeout ends the session.
    @(negedge clk);
    to = 1;
    @(negedge clk);
    to = 0;
    check(!busy, "idle after timeout");
    @(negedge clk);
    // New session: N forward moves to the end.
    m23 = 7'sd1; f0 = n_fwd;
    start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    check(n_fwd == f0 + N, "N forward moves to finish");
    check(int'(depth) == N, "depth N at end");
    check(!busy, "idle at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
