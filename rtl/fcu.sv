// fcu: Fano control unit of the PAC decoder.
//
// Runs the tree search on relative metrics: the current node N1 always has
// metric 0, the branch metrics M1 (N4 -> N1) and M23 (N1 -> examined child)
// come from the BMU, and T is the threshold relative to N1.  Psi marks a
// backward check, t selects the most (0) or least (1) likely child.  Each
// iteration evaluates one rule:
//   Rule 0/1  Psi=0, M23 >= T: move to the child, T <- T - M23, plus Delta
//             (Rule 0) if this is a first visit and the tightened threshold
//             stays at or below the child's metric; examine its best child.
//   Rule 2    no move possible: T <- T - Delta, examine the best child again.
//   Rule 3    back to N4 when N1 was N4's best child and N4 is not frozen:
//             T <- T + M1, examine the lateral child next.
//   Rule 4    otherwise back to N4, T <- T + M1, Psi <- 1 (check further back).
// A backward move is possible when N1 is not the root and M1 + T <= 0.  N1
// was N4's best child when u_{i-1} equals the sign of z_{i-1}, so no history
// beyond Ureg and the stored z values is needed.
//
// First visit is detected with the classic Fano test (N1 metric 0 < T + Delta).
// Applying the Delta tightening only when M23 >= T + Delta is this design's
// reading of Rule 0: with it, a noise-free frame never lowers the threshold.
// Rule 4 under Psi=1 is taken when N1 was N4's least likely child.
//
// Schedule per iteration: S_BMU registers the BMU outputs, S_RULE picks the
// rule, S_ACT applies it (threshold, depth, Vreg shift, Ureg write).  After a
// forward move the demapper is started for the new depth and S_PD waits for
// it; after Rules 2-4 the needed z is already stored and S_BMU follows
// directly.  Decoding ends (finish high for the last working cycle) when depth N is reached or the cycle counter
// reports a timeout (to); done pulses for one cycle afterwards.
// A frame without backtracking takes 3N + (2N-2) = 5N-2 cycles.
module fcu #(
  parameter int unsigned N  = pac_pkg::N_DEF,
  parameter int unsigned Q  = pac_pkg::Q_DEF,
  parameter int unsigned MW = pac_pkg::MW,
  localparam int unsigned LOGN = $clog2(N)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic signed [MW-1:0] delta,
  input  logic                 to,
  // BMU and operand multiplexers
  input  logic signed [Q-1:0]  m1,
  input  logic signed [Q-1:0]  m23,
  input  logic                 v_i,
  input  logic                 u_i,
  input  logic                 a_im1,
  input  logic                 u_im1,
  input  logic signed [Q-1:0]  z_im1,
  output logic                 t_i,
  output logic [LOGN:0]        depth,
  // polar demapper
  output logic                 pd_start,
  output logic [LOGN-1:0]      pd_idx,
  input  logic                 pd_done,
  // Vreg / Ureg / counter / output buffer
  output logic                 clr,
  output logic                 vreg_fwd,
  output logic                 vreg_bwd,
  output logic                 v_out,
  output logic                 ureg_we,
  output logic [LOGN-1:0]      ureg_idx,
  output logic                 u_out,
  output logic                 cnt_en,
  output logic                 busy,
  output logic                 finish,
  output logic                 done,
  output pac_pkg::rule_e       rule_applied,
  output logic                 rule_valid
);
  import pac_pkg::*;

  typedef enum logic [2:0] {S_IDLE, S_PD, S_BMU, S_RULE, S_ACT} state_e;

  state_e              st_q;
  logic signed [MW-1:0] t_q;      // relative threshold T
  logic                psi_q, tsel_q;
  logic [LOGN:0]       dep_q;
  logic signed [MW-1:0] m1_q, m23_q;
  logic                v_q, u_q;
  rule_e               rule_q, rule_d;

  // Rule selection from the registered BMU outputs.
  logic root, can_back, n1_best, back_lateral, first_visit;
  always_comb begin
    root         = (dep_q == '0);
    can_back     = !root && ((m1_q + t_q) <= 0);
    n1_best      = (u_im1 == z_im1[Q-1]);
    back_lateral = a_im1 && n1_best;
    first_visit  = (t_q + delta) > 0;
    if (!psi_q && (m23_q >= t_q))
      rule_d = (first_visit && (m23_q >= t_q + delta)) ? RULE0 : RULE1;
    else if (!can_back)
      rule_d = RULE2;
    else if (back_lateral)
      rule_d = RULE3;
    else
      rule_d = RULE4;
  end

  logic fwd_move, bwd_move;
  always_comb begin
    fwd_move = (st_q == S_ACT) && (rule_q == RULE0 || rule_q == RULE1);
    bwd_move = (st_q == S_ACT) && (rule_q == RULE3 || rule_q == RULE4);
    vreg_fwd = fwd_move && !to;
    vreg_bwd = bwd_move && !to;
    v_out    = v_q;
    ureg_we  = fwd_move && !to;
    ureg_idx = dep_q[LOGN-1:0];
    u_out    = u_q;
    t_i      = tsel_q;
    depth    = dep_q;
    busy     = (st_q != S_IDLE);
    cnt_en   = busy;
    clr      = (st_q == S_IDLE) && start;
    pd_start = clr || (fwd_move && !to && (dep_q + 1'b1 < (LOGN+1)'(N)));
    pd_idx   = clr ? '0 : LOGN'(dep_q + 1'b1);
    finish   = busy && (to || (fwd_move && (dep_q + 1'b1 == (LOGN+1)'(N))));
    rule_applied = rule_q;
    rule_valid   = (st_q == S_ACT) && !to;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q    <= S_IDLE;
      t_q     <= '0;
      psi_q   <= 1'b0;
      tsel_q  <= 1'b0;
      dep_q   <= '0;
      m1_q    <= '0;
      m23_q   <= '0;
      v_q     <= 1'b0;
      u_q     <= 1'b0;
      rule_q  <= RULE0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      if (st_q != S_IDLE && to) begin
        // Flowchart: time out ends the session.
        st_q    <= S_IDLE;
        done    <= 1'b1;
      end else begin
        unique case (st_q)
          S_IDLE: if (start) begin
            st_q    <= S_PD;
            t_q     <= '0;
            psi_q   <= 1'b0;
            tsel_q  <= 1'b0;
            dep_q   <= '0;
          end
          S_PD: if (pd_done) st_q <= S_BMU;
          S_BMU: begin
            m1_q  <= MW'(m1);
            m23_q <= MW'(m23);
            v_q   <= v_i;
            u_q   <= u_i;
            st_q  <= S_RULE;
          end
          S_RULE: begin
            rule_q <= rule_d;
            st_q   <= S_ACT;
          end
          S_ACT: begin
            unique case (rule_q)
              RULE0, RULE1: begin
                t_q    <= (rule_q == RULE0) ? (t_q + delta - m23_q) : (t_q - m23_q);
                tsel_q <= 1'b0;
                dep_q  <= dep_q + 1'b1;
                if (dep_q + 1'b1 == (LOGN+1)'(N)) begin
                  st_q <= S_IDLE;
                  done <= 1'b1;
                end else begin
                  st_q <= S_PD;
                end
              end
              RULE2: begin
                t_q    <= t_q - delta;
                psi_q  <= 1'b0;
                tsel_q <= 1'b0;
                st_q   <= S_BMU;
              end
              RULE3: begin
                t_q    <= t_q + m1_q;
                psi_q  <= 1'b0;
                tsel_q <= 1'b1;
                dep_q  <= dep_q - 1'b1;
                st_q   <= S_BMU;
              end
              default: begin
                t_q    <= t_q + m1_q;
                psi_q  <= 1'b1;
                dep_q  <= dep_q - 1'b1;
                st_q   <= S_BMU;
              end
            endcase
          end
          default: st_q <= S_IDLE;
        endcase
      end
    end
  end

  a_no_back_at_root: assert property (@(posedge clk) (st_q == S_ACT && dep_q == '0) |-> !bwd_move);
endmodule
