// tb_rs_chien_forney: checks the correction stage on its own. For random
// errata patterns (locations X_k = alpha^p, values Y_k) the testbench forms
// X(z) = beta z^k Lambda(z) and V(z) = beta z^k Omega(z) from their
// definitions, with random beta and shift k, streams a random received
// word with gaps and expects the word plus the error values back, out_err
// exactly at the errata positions and out_fail = 0 on the last symbol.
// It also checks pass-through and out_fail when fail_in is set, out_fail
// when eta disagrees with the roots found, the one-clock latency, and the
// Forney scaling for a second instance with B0 = 3.
module tb_rs_chien_forney;
  import tb_gf_pkg::*;

  localparam int N = 255, T = 8, TT = 2 * T;

  logic       clk = 0, rst_n = 0, load = 0, fail_in = 0;
  logic       r_valid = 0, r_last = 0;
  logic [7:0] r_sym = 0;
  logic [4:0] eta = 0;
  logic [7:0] lambda [TT+1];
  logic [7:0] om0 [TT+1];
  logic [7:0] om3 [TT+1];
  logic       ov [2], oe [2], ol [2], of [2];
  logic [7:0] os [2];
  int checks = 0, failures = 0;

  rs_chien_forney #(.N(N), .T(T)) dut (
    .clk, .rst_n, .load, .lambda, .omega(om0), .fail_in, .eta, .r_valid, .r_sym, .r_last,
    .out_valid(ov[0]), .out_sym(os[0]), .out_err(oe[0]), .out_last(ol[0]), .out_fail(of[0]));
  rs_chien_forney #(.N(N), .T(T), .B0(3)) dut_b3 (
    .clk, .rst_n, .load, .lambda, .omega(om3), .fail_in, .eta, .r_valid, .r_sym, .r_last,
    .out_valid(ov[1]), .out_sym(os[1]), .out_err(oe[1]), .out_last(ol[1]), .out_fail(of[1]));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
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
    int pos[$], xl[$], yv[$], lam[$], term[$], r[$];
    int om [2][$];
    int e [N];
    bit isloc [N];
    int eta_n, beta, sh, bsel, mode;
    init();
    for (int i = 0; i <= TT; i++) begin lambda[i] = 0; om0[i] = 0; om3[i] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 40; trial++) begin
      mode  = trial % 4;   // 0,1: correctable, 2: fail_in, 3: wrong eta
      eta_n = (trial == 0) ? 0 : $urandom_range(TT);
      pos = {};
      while (pos.size() < eta_n) begin
        int p, dup;
        p = $urandom_range(N - 1);
        dup = 0;
        foreach (pos[q]) if (pos[q] == p) dup = 1;
        if (dup == 0) pos.push_back(p);
      end
      xl = {}; yv = {};
      for (int i = 0; i < N; i++) begin e[i] = 0; isloc[i] = 0; end
      foreach (pos[q]) begin
        xl.push_back(pw(pos[q]));
        yv.push_back($urandom_range(255));   // zero allowed (erasure)
        e[pos[q]] = yv[q];
        isloc[pos[q]] = 1;
      end
      lam = {1};
      foreach (xl[q]) mul_lin(lam, xl[q]);
      for (int b = 0; b < 2; b++) begin
        om[b] = {};
        for (int i = 0; i < eta_n; i++) om[b].push_back(0);
        foreach (xl[q]) begin
          term = {mul(yv[q], pw((b == 0 ? 0 : 3) * log_t[xl[q]]))};
          foreach (xl[s]) if (s != q) mul_lin(term, xl[s]);
          foreach (term[i]) if (i < eta_n) om[b][i] ^= term[i];
        end
      end
      beta = $urandom_range(1, 255);
      sh   = $urandom_range(TT - eta_n);
      for (int i = 0; i <= TT; i++) begin
        lambda[i] = (i >= sh && i - sh <= eta_n) ? 8'(mul(beta, lam[i - sh])) : 8'(0);
        om0[i]    = (i >= sh && i - sh <  eta_n) ? 8'(mul(beta, om[0][i - sh])) : 8'(0);
        om3[i]    = (i >= sh && i - sh <  eta_n) ? 8'(mul(beta, om[1][i - sh])) : 8'(0);
      end
      fail_in = (mode == 2);
      eta     = (mode == 3) ? 5'(eta_n + 1) : 5'(eta_n);
      @(negedge clk);
      load = 1;
      @(negedge clk);
      load = 0;
      r = {};
      for (int i = 0; i < N; i++) r.push_back($urandom_range(255));
      for (int k = 0; k < N; k++) begin
        int j;
        j = N - 1 - k;    // degree of this symbol
        if ($urandom_range(4) == 0) @(negedge clk);
        r_valid = 1;
        r_sym   = 8'(r[j]);
        r_last  = (k == N - 1);
        @(negedge clk);
        r_valid = 0;
        r_last  = 0;
        for (int b = 0; b < 2; b++) begin
          check("latency", int'(ov[b]), 1);
          check($sformatf("t%0d b%0d sym deg %0d", trial, b, j), int'(os[b]),
                (mode == 2) ? r[j] : (r[j] ^ e[j]));
          check("err flag", int'(oe[b]), (mode != 2 && isloc[j]) ? 1 : 0);
          check("last", int'(ol[b]), (k == N - 1) ? 1 : 0);
          if (k == N - 1) check($sformatf("t%0d fail mode %0d", trial, mode), int'(of[b]), (mode >= 2) ? 1 : 0);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
