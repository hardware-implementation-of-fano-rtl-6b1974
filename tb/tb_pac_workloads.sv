// tb_pac_workloads: the operating points of the published evaluation, run on
// the full-size decoder (N = 128, K = 64, Q = 7, Delta = 2).
//
// For Eb/N0 = 1.0 ... 3.5 dB in 0.5 dB steps and for the cycle budgets
// MC = 2^14 and MC = 2^18 it decodes FRAMES random frames (same transmitter,
// channel, frozen set and bias as tb_pac_fano_decoder) and prints the average
// number of cycles per codeword and the frame error count.  The published
// curves use millions of frames; this run is a short sample of each point.
// Self-checks: every frame takes at least 5N-2 cycles; a frame reports a
// timeout exactly when its count passed MC; the average cycle count does not
// grow with SNR beyond sampling noise; at 3.5 dB the average stays within the
// range the published curve allows for a short sample (below 2000 cycles,
// published average about 840); and at 3.5 dB no frame times out with
// MC = 2^18.
module tb_pac_workloads;
  import pac_pkg::*;
  localparam int unsigned N = pac_pkg::N_DEF;
  localparam int unsigned Q = pac_pkg::Q_DEF;
  localparam int unsigned H = pac_pkg::H_DEF;
  localparam int unsigned LOGN = $clog2(N);
  localparam int MAXL = (1 << (Q - 1)) - 1;
  localparam int FRAMES = 60;

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

  initial begin
    #200000000;
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

  int llr_q [N];
  bit v_tx [N];

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom) + 1.0) / 4294967297.0;
    u2 = real'($urandom) / 4294967296.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  task automatic make_frame(input real ebn0_db);
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
      y = (x[j] ? -1.0 : 1.0) + $sqrt(sigma2) * gauss();
      llr_q[j] = int'($floor(2.0 * y / sigma2 + 0.5));
      if (llr_q[j] > MAXL) llr_q[j] = MAXL;
      if (llr_q[j] < -MAXL) llr_q[j] = -MAXL;
    end
  endtask

  task automatic run_frame(input real ebn0_db, input int mcv, output int cyc, output bit tout, output bit err);
    make_frame(ebn0_db);
    @(negedge clk);
    for (int j = 0; j < int'(N); j++) begin
      llr_we = 1'b1; llr_addr = LOGN'(j); llr_data = Q'(llr_q[j]);
      @(negedge clk);
    end
    llr_we = 1'b0;
    mc = CCW'(mcv);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    cyc = int'(cycles);
    tout = to;
    err = 0;
    for (int j = 0; j < int'(N); j++) if (a_vec[j] && v_hat[j] != v_tx[j]) err = 1;
  endtask

  initial begin
    real e0, acc;
    real prev_acc [2];
    int mcs [2] = '{1 << 14, 1 << 18};
    for (int i = 0; i < int'(N); i++) a_vec[i] = ($countones(LOGN'(i)) >= 4);
    for (int i = 0; i < int'(N); i++) begin
      e0 = 0.28;
      for (int k = int'(LOGN) - 1; k >= 0; k--) e0 = ((i >> k) & 1) ? e0 * e0 : 2.0 * e0 - e0 * e0;
      b_vec[i] = ((1.0 - e0) >= 0.5);
    end
    prev_acc[0] = 1.0e9; prev_acc[1] = 1.0e9;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    $display(" Eb/N0   MC      avg cycles  frame errors  timeouts");
    for (int s = 0; s < 6; s++) begin
      real ebn0;
      ebn0 = 1.0 + 0.5 * real'(s);
      for (int mi = 0; mi < 2; mi++) begin
        int sum, nerr, nto, cyc;
        bit tout, err;
        sum = 0; nerr = 0; nto = 0;
        for (int f = 0; f < FRAMES; f++) begin
          run_frame(ebn0, mcs[mi], cyc, tout, err);
          sum += cyc;
          if (err) nerr++;
          if (tout) nto++;
          check(cyc >= 5 * int'(N) - 2, $sformatf("%.1f dB: %0d cycles below 5N-2", ebn0, cyc));
          check(tout == (cyc > mcs[mi] + 1), $sformatf("%.1f dB: timeout flag %0d with %0d cycles", ebn0, tout, cyc));
        end
        acc = real'(sum) / real'(FRAMES);
        $display(" %4.1f   2^%0d   %9.1f   %4d/%0d       %0d", ebn0, (mi == 0) ? 14 : 18, acc, nerr, FRAMES, nto);
        check(acc <= 1.5 * prev_acc[mi], $sformatf("%.1f dB: average cycles rose to %.1f", ebn0, acc));
        prev_acc[mi] = acc;
        if (s == 5) begin
          check(acc < 2000.0, $sformatf("3.5 dB average %.1f cycles", acc));
          if (mi == 1) check(nto == 0, "timeout at 3.5 dB with MC = 2^18");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
