// tb_pac_fano_decoder: end-to-end test of the PAC Fano decoder at full size
// (N = 128, K = 64, Q = 7, c = (1,0,1,1,0,1,1), Delta = 2).
//
// The testbench plays the role of the transmitter and channel.  Random data
// d is placed in the Reed-Muller-scored positions (the 64 indices with at
// least four ones in their binary form), convolved with c, polar transformed,
// BPSK modulated and sent through an AWGN channel (Box-Muller noise); the
// channel LLRs 2y/sigma^2 are rounded to Q-bit integers.  The bias bits b are
// the hard-decided (>= 0.5) bit-channel capacities of a binary erasure channel
// with the same capacity as the design point, computed by the usual
// erasure-probability recursion.
//
// Every frame is also decoded by a behavioural reference model written from
// the rule list of the algorithm: it recomputes each z_i from scratch with a
// direct SC recursion (partial sums from the subset formula
// x_j = XOR_{m covers j} u_m), evaluates the tabulated branch metric and the
// five rules with plain integers, and counts cycles from the schedule
// (3 per iteration plus tz(i)+1 demapper cycles per forward arrival, n at the
// root).  The decoder must match the model's carrier word, cycle count,
// timeout flag and the number of times each rule fires.  Noise-free frames
// must decode correctly in exactly 5N-2 cycles.  The run must exercise every
// rule, a backward check, a lateral move and a timeout at least once.
module tb_pac_fano_decoder;
  import pac_pkg::*;
  localparam int unsigned N = pac_pkg::N_DEF;
  localparam int unsigned Q = pac_pkg::Q_DEF;
  localparam int unsigned H = pac_pkg::H_DEF;
  localparam int unsigned LOGN = $clog2(N);
  localparam int MAXL = (1 << (Q - 1)) - 1;

  logic clk = 1'b0, rst_n = 1'b0;
  logic llr_we = 1'b0;
  logic [LOGN-1:0] llr_addr = '0;
  logic signed [Q-1:0] llr_data = '0;
  logic [N-1:0] a_vec, b_vec;
  logic signed [MW-1:0] delta = MW'(2);
  logic [CCW-1:0] mc = CCW'(1 << 18);
  logic start = 1'b0;
  logic busy, done, to;
  logic [N-1:0] v_hat;
  logic [CCW-1:0] cycles;
  rule_e rule;
  logic rule_valid;

  pac_fano_decoder dut (
    .clk, .rst_n, .llr_we, .llr_addr, .llr_data, .a(a_vec), .b(b_vec), .delta, .mc,
    .start, .busy, .done, .v_hat, .cycles, .to, .rule, .rule_valid);

  always #1 clk = ~clk;

  int checks = 0, failures = 0;
  int rtl_rules [5];
  int tot_rules [5];
  int n_timeout = 0, n_frames = 0, n_frame_err = 0;

  always @(posedge clk) if (rule_valid) rtl_rules[int'(rule)]++;

  initial begin
    #40000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---------------- transmitter / channel ----------------
  int llr_q [N];
  bit v_tx [N];

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom) + 1.0) / 4294967297.0;
    u2 = real'($urandom) / 4294967296.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  task automatic make_frame(input real ebn0_db, input bit noiseless);
    bit u [N];
    bit x [N];
    real sigma2, y;
    for (int i = 0; i < int'(N); i++) v_tx[i] = a_vec[i] ? 1'($urandom) : 1'b0;
    for (int i = 0; i < int'(N); i++) begin
      u[i] = 1'b0;
      for (int j = 0; j <= int'(H); j++) if (i - j >= 0) u[i] ^= C_POLY[j] & v_tx[i-j];
    end
    for (int j = 0; j < int'(N); j++) begin
      x[j] = 1'b0;
      for (int m = 0; m < int'(N); m++) if ((m & j) == j) x[j] ^= u[m];
    end
    sigma2 = 1.0 / (2.0 * 0.5 * (10.0 ** (ebn0_db / 10.0)));
    for (int j = 0; j < int'(N); j++) begin
      y = (x[j] ? -1.0 : 1.0) + (noiseless ? 0.0 : $sqrt(sigma2) * gauss());
      llr_q[j] = int'($floor(2.0 * y / sigma2 + 0.5));
      if (llr_q[j] > MAXL) llr_q[j] = MAXL;
      if (llr_q[j] < -MAXL) llr_q[j] = -MAXL;
    end
  endtask

  // ---------------- reference model ----------------
  int zr [N];
  bit ur [N];
  bit vr [N];

  function automatic int satq(input int x);
    return (x > MAXL) ? MAXL : ((x < -MAXL) ? -MAXL : x);
  endfunction

  function automatic int iabs(input int x);
    return (x < 0) ? -x : x;
  endfunction

  // z_i by a direct top-down SC recursion over the tree path of i.
  function automatic int ref_z(input int i);
    int cur [N];
    int nxt [N];
    for (int j = 0; j < int'(N); j++) cur[j] = llr_q[j];
    for (int k = int'(LOGN) - 1; k >= 0; k--) begin
      int pb, w;
      w = 1 << k;
      pb = (i >> (k + 1)) << (k + 1);
      for (int j = 0; j < w; j++) begin
        int aa, bb, m;
        aa = cur[pb + j];
        bb = cur[pb + j + w];
        if (((i >> k) & 1) == 0) begin
          m = (iabs(aa) < iabs(bb)) ? iabs(aa) : iabs(bb);
          nxt[pb + j] = satq(((aa < 0) != (bb < 0)) ? -m : m);
        end else begin
          bit beta;
          beta = 1'b0;
          for (int mm = j; mm < w; mm++) if ((mm & j) == j) beta ^= ur[pb + mm];
          nxt[pb + j] = satq(beta ? bb - aa : bb + aa);
        end
      end
      for (int j = 0; j < w; j++) cur[pb + j] = nxt[pb + j];
      // the next level's block starts at base (i >> k) << k
      if (((i >> k) & 1) == 1) for (int j = 0; j < w; j++) cur[pb + w + j] = nxt[pb + j];
    end
    return cur[i];
  endfunction

  function automatic int gam(input int z, input bit b, input bit u);
    int mag;
    mag = iabs(z);
    if (mag > MAXL) mag = MAXL;
    if (u == (z < 0)) return 1 - int'(b);
    return 1 - mag - int'(b);
  endfunction

  function automatic int pd_cost(input int i);
    int t;
    if (i == 0) return LOGN;
    t = 0;
    while (((i >> t) & 1) == 0) t++;
    return t + 1;
  endfunction

  int ref_rules [5];
  int ref_cycles;
  bit ref_to;

  task automatic ref_decode(input int mcv, input int dlt);
    int i, t_thr, m1, m23, rl;
    bit psi, tsel, u0, uu, vv;
    i = 0; t_thr = 0; psi = 0; tsel = 0; ref_to = 0;
    for (int r = 0; r < 5; r++) ref_rules[r] = 0;
    zr[0] = ref_z(0);
    ref_cycles = LOGN;
    while (1) begin
      if (ref_cycles + 3 > mcv + 1) begin
        ref_to = 1;
        break;
      end
      ref_cycles += 3;
      m23 = 0; m1 = 0; uu = 0; vv = 0;
      if (i < int'(N)) begin
        u0 = 0;
        for (int j = 1; j <= int'(H); j++) if (i - j >= 0) u0 ^= C_POLY[j] & vr[i-j];
        uu = a_vec[i] ? ((zr[i] < 0) ^ tsel) : u0;
        vv = uu ^ u0;
        m23 = gam(zr[i], b_vec[i], uu);
      end
      if (i > 0) m1 = gam(zr[i-1], b_vec[i-1], ur[i-1]);
      if (!psi && m23 >= t_thr)
        rl = ((t_thr + dlt > 0) && (m23 >= t_thr + dlt)) ? 0 : 1;
      else if (i == 0 || m1 + t_thr > 0)
        rl = 2;
      else if (a_vec[i-1] && (ur[i-1] == (zr[i-1] < 0)))
        rl = 3;
      else
        rl = 4;
      ref_rules[rl]++;
      case (rl)
        0, 1: begin
          t_thr = (rl == 0) ? t_thr + dlt - m23 : t_thr - m23;
          vr[i] = vv; ur[i] = uu; tsel = 0;
          i++;
          if (i == int'(N)) break;
          zr[i] = ref_z(i);
          if (ref_cycles + pd_cost(i) > mcv + 1) begin
            ref_to = 1;
            break;
          end
          ref_cycles += pd_cost(i);
        end
        2: begin t_thr -= dlt; psi = 0; tsel = 0; end
        3: begin t_thr += m1; psi = 0; tsel = 1; i--; end
        default: begin t_thr += m1; psi = 1; i--; end
      endcase
    end
  endtask

  // ---------------- one frame through the decoder ----------------
  task automatic run_frame(input real ebn0_db, input bit noiseless, input int mcv, input string tag);
    bit ok;
    make_frame(ebn0_db, noiseless);
    @(negedge clk);
    for (int j = 0; j < int'(N); j++) begin
      llr_we = 1'b1; llr_addr = LOGN'(j); llr_data = Q'(llr_q[j]);
      @(negedge clk);
    end
    llr_we = 1'b0;
    mc = CCW'(mcv);
    for (int r = 0; r < 5; r++) rtl_rules[r] = 0;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    ref_decode(mcv, 2);
    n_frames++;
    check(to == ref_to, $sformatf("%s frame %0d: timeout rtl=%0d ref=%0d", tag, n_frames, to, ref_to));
    if (ref_to) n_timeout++;
    if (!ref_to) begin
      ok = 1;
      for (int j = 0; j < int'(N); j++) if (v_hat[j] != vr[j]) ok = 0;
      check(ok, $sformatf("%s frame %0d: decoded word differs from reference", tag, n_frames));
      check(int'(cycles) == ref_cycles,
            $sformatf("%s frame %0d: cycles rtl=%0d ref=%0d", tag, n_frames, cycles, ref_cycles));
      for (int r = 0; r < 5; r++)
        check(rtl_rules[r] == ref_rules[r],
              $sformatf("%s frame %0d: rule %0d count rtl=%0d ref=%0d", tag, n_frames, r, rtl_rules[r], ref_rules[r]));
      ok = 1;
      for (int j = 0; j < int'(N); j++) if (v_hat[j] != v_tx[j]) ok = 0;
      if (!ok) n_frame_err++;
      if (noiseless) begin
        check(ok, $sformatf("%s: noise-free frame decoded wrongly", tag));
        check(int'(cycles) == 5 * int'(N) - 2, $sformatf("%s: noise-free cycles %0d != 5N-2", tag, cycles));
      end
    end
    for (int r = 0; r < 5; r++) tot_rules[r] += rtl_rules[r];
    $display("%s frame %0d: cycles=%0d to=%0d rules=%0d/%0d/%0d/%0d/%0d", tag, n_frames, cycles, to,
             rtl_rules[0], rtl_rules[1], rtl_rules[2], rtl_rules[3], rtl_rules[4]);
  endtask

  initial begin
    real e0, ed;
    // Reed-Muller scoring: data where popcount(i) >= 4 (64 positions).
    for (int i = 0; i < int'(N); i++) a_vec[i] = ($countones(LOGN'(i)) >= 4);
    // Bias: hard-decided BEC capacities; erasure probability 0.28.
    for (int i = 0; i < int'(N); i++) begin
      e0 = 0.28;
      for (int k = int'(LOGN) - 1; k >= 0; k--) e0 = ((i >> k) & 1) ? e0 * e0 : 2.0 * e0 - e0 * e0;
      b_vec[i] = ((1.0 - e0) >= 0.5);
    end
    check($countones(a_vec) == 64, "K must be 64");
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_frame(0.0, 1, 1 << 18, "noise-free");
    run_frame(0.0, 1, 1 << 18, "noise-free");
    for (int f = 0; f < 12; f++) run_frame(3.5, 0, 1 << 18, "3.5dB");
    for (int f = 0; f < 6; f++) run_frame(2.0, 0, 1 << 18, "2.0dB");
    for (int f = 0; f < 4; f++) run_frame(1.0, 0, 1 << 14, "1.0dB");
    run_frame(0.0, 0, 300, "short-MC");
    ed = 0.0;
    $display("frames=%0d timeouts=%0d frame errors (non-timeout)=%0d", n_frames, n_timeout, n_frame_err);
    for (int r = 0; r < 5; r++) begin
      $display("rule %0d applied %0d times", r, tot_rules[r]);
      check(tot_rules[r] > 0, $sformatf("rule %0d never applied", r));
    end
    check(n_timeout > 0, "timeout never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
