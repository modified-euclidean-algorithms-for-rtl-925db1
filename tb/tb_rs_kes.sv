// tb_rs_kes: runs the key-equation solver on random errata patterns and
// checks the result the algorithm promises, computed here directly from
// the pattern rather than by running the algorithm:
//   - for nu errors and mu erasures with 2nu+mu <= 2T (eta = nu+mu):
//     X_{2T-eta+i} = beta*Lambda_i, V_{2T-eta+i} = beta*Omega_i for one
//     nonzero beta, all lower coefficients zero, delta < 0, psi_0 = 0 and
//     fail = 0; delta = 2nu + mu - 2T - 1 and eta = nu + mu;
//   - more than 2T erasures: fail = 1; T+1 errors: fail = 1 or X(z) has
//     fewer roots than the degree eta the run implies;
//   - done exactly 2T+1 clocks after start (load + 2T iterations),
//     whatever the pattern.
// Lambda and Omega come from their definitions as products over the
// errata locations X_k with values Y_k; the syndromes are
// S_j = sum_k Y_k X_k^(b0+j), with b0 drawn at random from {0, 1}.
module tb_rs_kes;
  import tb_gf_pkg::*;

  localparam int T = 8, TT = 2 * T, N = 255;

  logic       clk = 0, rst_n = 0, start = 0;
  logic [7:0] syn [TT];
  logic [7:0] psi_in [TT+1];
  logic       busy, done, fail;
  logic [7:0] lambda [TT+1];
  logic [7:0] omega [TT+1];
  logic signed [$clog2(TT+2):0] delta;
  logic [7:0] psi0;
  logic [$clog2(TT+1)-1:0] eta;
  int checks = 0, failures = 0;
  int n_swap = 0, n_first = 0, n_kes_fail = 0;

  rs_kes #(.T(T)) dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) if (busy) begin
    if (dut.swap)  n_swap++;
    if (dut.first) n_first++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 30) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    int pos[$];
    int xl[$], yv[$];
    int lam[$], om[$], term[$];
    int nu, mu, eta, b0, beta, lat, mode;
    init();
    for (int k = 0; k <= TT; k++) psi_in[k] = 0;
    for (int j = 0; j < TT; j++) syn[j] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 600; trial++) begin
      mode = trial % 10;
      // choose the pattern
      if (mode == 8) begin nu = 0; mu = TT + 1 + $urandom_range(3); end   // too many erasures
      else if (mode == 9) begin nu = T + 1; mu = 0; end                   // too many errors
      else if (mode == 0) begin nu = $urandom_range(T); mu = 0; end       // errors only
      else begin
        mu = $urandom_range(TT);
        nu = $urandom_range((TT - mu) / 2);
      end
      if (trial == 1) begin nu = 0; mu = 0; end
      b0 = $urandom_range(1);
      eta = nu + mu;
      // distinct positions; erasures first in the list
      pos = {};
      while (pos.size() < eta) begin
        int p, dup;
        p = $urandom_range(N - 1);
        dup = 0;
        foreach (pos[q]) if (pos[q] == p) dup = 1;
        if (dup == 0) pos.push_back(p);
      end
      xl = {}; yv = {};
      foreach (pos[q]) begin
        xl.push_back(pw(pos[q]));
        // error values nonzero; erasure values may be zero
        yv.push_back((q < mu) ? $urandom_range(255) : $urandom_range(1, 255));
      end
      for (int j = 0; j < TT; j++) begin
        int s;
        s = 0;
        foreach (xl[q]) s ^= mul(yv[q], pw((b0 + j) * log_t[xl[q]]));
        syn[j] = 8'(s);
      end
      for (int k = 0; k <= TT; k++) psi_in[k] = (k < mu) ? 8'(xl[k]) : 8'(0);
      // run
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      lat = 1;
      while (!done) begin
        @(negedge clk);
        lat++;
        if (lat > 100) break;
      end
      check("latency", lat, TT + 1);
      if (mode == 8) begin
        check("fail on too many erasures", int'(fail), 1);
        continue;
      end
      if (mode == 9) begin
        // T+1 errors: either flagged, or X(z) has fewer roots among the N
        // positions than the locator degree (delta + 2T + 1)/2 it implies
        int roots;
        roots = 0;
        for (int p = 0; p < N; p++) begin
          int xs[$];
          xs = {};
          for (int i = 0; i <= TT; i++) xs.push_back(int'(lambda[i]));
          if (eval(xs, pw(-p)) == 0) roots++;
        end
        if (fail) n_kes_fail++;
        check("uncorrectable detectable", int'(fail || roots != int'(eta)), 1);
        continue;
      end
      // expected locator and evaluator
      lam = {1};
      foreach (xl[q]) mul_lin(lam, xl[q]);
      om = {};
      for (int i = 0; i < eta; i++) om.push_back(0);
      foreach (xl[q]) begin
        term = {pw(b0 * log_t[xl[q]])};
        term[0] = mul(term[0], yv[q]);
        foreach (xl[r]) if (r != q) mul_lin(term, xl[r]);
        foreach (term[i]) if (i < eta) om[i] ^= term[i];
      end
      beta = int'(lambda[TT - eta]);
      checks++;
      if (beta == 0) begin
        failures++;
        $display("FAIL trial %0d: beta = 0 (nu=%0d mu=%0d)", trial, nu, mu);
      end
      for (int i = 0; i <= TT; i++) begin
        int ex, ev;
        ex = (i >= TT - eta) ? mul(beta, lam[i - (TT - eta)]) : 0;
        ev = (i >= TT - eta && i < TT) ? mul(beta, om[i - (TT - eta)]) : 0;
        check($sformatf("t%0d X_%0d (nu=%0d mu=%0d)", trial, i, nu, mu), int'(lambda[i]), ex);
        check($sformatf("t%0d V_%0d (nu=%0d mu=%0d)", trial, i, nu, mu), int'(omega[i]), ev);
      end
      check("fail", int'(fail), 0);
      check("psi0", int'(psi0), 0);
      check("delta < 0", int'(delta < 0), 1);
      check("delta = 2nu+mu-2T-1", int'(delta), 2 * nu + mu - TT - 1);
      check("eta", int'(eta), nu + mu);
    end
    check("SWAP exercised", int'(n_swap > 0), 1);
    check("FIRST exercised", int'(n_first > 0), 1);
    $display("swaps=%0d erasure iterations=%0d", n_swap, n_first);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
