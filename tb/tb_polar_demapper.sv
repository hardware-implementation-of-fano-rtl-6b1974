// tb_polar_demapper: drives the demapper the way a backtracking search does.
// Random channel LLRs; the index walks forward, and now and then jumps back
// to an earlier depth, changes that decided bit and walks forward again.
// After every request the stored z_i must equal a from-scratch SC recursion
// (subset-rule partial sums), all earlier z values on the path must still be
// valid, and the request must take tz(i)+1 cycles (n at index 0).
module tb_polar_demapper;
  localparam int N = 128, Q = 7, LOGN = 7;
  localparam int MAXL = 63;
  logic clk = 0, rst_n = 0, start = 0;
  logic [LOGN-1:0] idx = '0;
  logic signed [Q-1:0] llr [N];
  logic [N-1:0] u = '0;
  logic busy, done;
  logic signed [Q-1:0] z [N];
  int l [N];
  int checks = 0, failures = 0;

  polar_demapper #(.N(N), .Q(Q)) dut (.clk, .rst_n, .start, .idx, .llr, .u, .busy, .done, .z);
  always #1 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int satq(input int x);
    return (x > MAXL) ? MAXL : ((x < -MAXL) ? -MAXL : x);
  endfunction
  function automatic int iabs(input int x);
    return (x < 0) ? -x : x;
  endfunction

  function automatic int ref_z(input int i);
    int cur [N];
    int nxt [N];
    for (int j = 0; j < N; j++) cur[j] = l[j];
    for (int k = LOGN - 1; k >= 0; k--) begin
      int pb, w;
      w = 1 << k;
      pb = (i >> (k + 1)) << (k + 1);
      for (int j = 0; j < w; j++) begin
        int aa, bb, m;
        aa = cur[pb + j];
        bb = cur[pb + j + w];
        if (((i >> k) & 1) == 0) begin
          m = (iabs(aa) < iabs(bb)) ? iabs(aa) : iabs(bb);
          nxt[j] = satq(((aa < 0) != (bb < 0)) ? -m : m);
        end else begin
          bit beta;
          beta = 0;
          for (int mm = j; mm < w; mm++) if ((mm & j) == j) beta ^= u[pb + mm];
          nxt[j] = satq(beta ? bb - aa : bb + aa);
        end
      end
      for (int j = 0; j < w; j++) cur[((i >> k) << k) + j] = nxt[j];
    end
    return cur[i];
  endfunction

  function automatic int cost(input int i);
    int t;
    if (i == 0) return LOGN;
    t = 0;
    while (((i >> t) & 1) == 0) t++;
    return t + 1;
  endfunction

  task automatic request(input int i);
    int cyc;
    idx = LOGN'(i);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
    @(negedge clk);
    checks += 2;
    if (int'(z[i]) != ref_z(i)) begin
      failures++;
      $display("FAIL z[%0d]=%0d expected %0d", i, z[i], ref_z(i));
    end
    if (cyc != cost(i)) begin
      failures++;
      $display("FAIL z[%0d] took %0d cycles, expected %0d", i, cyc, cost(i));
    end
  endtask

  initial begin
    int d, back;
    for (int j = 0; j < N; j++) begin
      l[j] = $urandom_range(40) - 20;
      llr[j] = Q'(l[j]);
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    d = 0;
    request(0);
    back = 0;
    while (d < N - 1) begin
      u[d] = 1'($urandom);
      d++;
      request(d);
      if (d > 4 && $urandom_range(9) == 0 && back < 40) begin
        // backtrack: return to an earlier depth, flip its bit, go on
        d = d - $urandom_range(1, 6);
        back++;
        u[d] = ~u[d];
        d++;
        request(d);
        for (int j = 0; j <= d; j++) begin
          checks++;
          if (int'(z[j]) != ref_z(j)) begin
            failures++;
            $display("FAIL stale z[%0d] after backtrack", j);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
