// tb_rs_decoder: end-to-end test of the errors-and-erasures decoder at its
// default size (RS(255,239) over GF(2^8), T = 8, B0 = 0).
//
// Each word is a random codeword c(z) = m(z) g(z), g(z) = prod (z - alpha^j),
// j = 0..2T-1, hit by a chosen errata pattern and sent with random input
// gaps, highest degree first. Expected behaviour:
//   2nu + mu <= 2T     output equals the codeword, out_err exactly at the
//                      errata positions, out_fail = 0;
//   mu > 2T            out_fail = 1, word passed through unchanged;
//   nu = T, mu = 1     out_fail = 1 (ends with delta >= 0), passed through;
//   nu = T + 1         out_fail = 1, or (rare) a different codeword.
// It also checks that the solver takes exactly 2T+1 clocks from start to
// done, that in_ready stays low for exactly N+2T+2 clocks per word (one
// word every 2N+2T+2 clocks at full input rate), and counts every
// mechanism of the design (SWAP, erasure iterations, both solver failure
// causes, the root-count failure, input stalls); one that never happened
// is a failure.
module tb_rs_decoder;
  import tb_gf_pkg::*;

  localparam int N = 255, T = 8, TT = 2 * T, B0 = 0;
  localparam int WORDS = 60;

  logic       clk = 0, rst_n = 0;
  logic       in_valid = 0, in_erase = 0, in_ready;
  logic [7:0] in_sym = 0;
  logic       out_valid, out_err, out_last, out_fail;
  logic [7:0] out_sym;
  int checks = 0, failures = 0;

  rs_decoder dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (WORDS * 2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
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

  // ---- mechanism counters, observed inside the decoder -------------------
  int n_swap = 0, n_first = 0, n_fail_delta = 0, n_fail_psi = 0;
  int n_fail_roots = 0, n_stall = 0, n_blocked = 0, n_kes = 0, n_miscorrect = 0;
  int kes_t0;
  int busy_run = 0;
  int cyc = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (dut.u_kes.busy && dut.u_kes.swap)  n_swap++;
    if (dut.u_kes.busy && dut.u_kes.first) n_first++;
    if (dut.u_kes.start && !dut.u_kes.busy) kes_t0 = cyc;
    if (dut.u_kes.done) begin
      n_kes++;
      check("KES latency 2T+1", cyc - kes_t0, TT + 1);
      if (dut.u_kes.delta >= 0)      n_fail_delta++;
      if (dut.u_kes.psi0 != '0)      n_fail_psi++;
    end
    if (in_valid && !in_ready) n_blocked++;
    // busy period per word: syndrome, 2T+1 solver cycles, EC load, N reads
    if (!in_ready) busy_run++;
    else if (busy_run != 0) begin
      check("in_ready low for N+2T+2 cycles", busy_run, N + TT + 2);
      busy_run = 0;
    end
    if (!in_valid && in_ready)  n_stall++;
  end

  // ---- output collection --------------------------------------------------
  int got [$];
  int got_err [$];
  int got_fail;
  always @(posedge clk) if (rst_n && out_valid) begin
    got.push_back(int'(out_sym));
    got_err.push_back(int'(out_err));
    if (out_last) got_fail = int'(out_fail);
    check("out_last only on last", int'(out_last), (got.size() == N) ? 1 : 0);
  end

  initial begin
    int c[$], rx[$], pos[$];
    bit isloc [N];
    bit erased [N];
    int nu, mu, kind, ok;
    bit kesfail;
    init();
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int w = 0; w < WORDS; w++) begin
      kind = w % 10;
      case (kind)
        0: begin nu = 0; mu = 0; end                          // clean
        1, 2: begin nu = $urandom_range(T); mu = 0; end       // errors only
        6: begin nu = 0; mu = TT; end                         // erasures only, full
        7: begin nu = 0; mu = TT + 1 + $urandom_range(5); end // too many erasures
        8: begin nu = T; mu = 1; end                          // 2nu+mu = 2T+1
        9: begin nu = T + 1; mu = 0; end                      // too many errors
        default: begin mu = $urandom_range(TT); nu = $urandom_range((TT - mu) / 2); end
      endcase
      codeword(N, T, B0, c);
      rx = c;
      for (int i = 0; i < N; i++) begin isloc[i] = 0; erased[i] = 0; end
      pos = {};
      while (pos.size() < nu + mu) begin
        int p, dup;
        p = $urandom_range(N - 1);
        dup = 0;
        foreach (pos[q]) if (pos[q] == p) dup = 1;
        if (dup == 0) pos.push_back(p);
      end
      foreach (pos[q]) begin
        isloc[pos[q]] = 1;
        if (q < mu) begin
          erased[pos[q]] = 1;
          rx[pos[q]] = $urandom_range(255);            // may equal the true value
        end else begin
          rx[pos[q]] = c[pos[q]] ^ $urandom_range(1, 255);
        end
      end
      got = {}; got_err = {}; got_fail = -1;
      // send, highest degree first, with random gaps
      for (int k = 0; k < N; k++) begin
        int j;
        j = N - 1 - k;
        @(negedge clk);
        while ($urandom_range(7) == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1;
        in_sym   = 8'(rx[j]);
        in_erase = erased[j];
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
      @(negedge clk);
      in_valid = 0; in_erase = 0;
      // keep offering the next word's first symbol while busy (must be held off)
      in_valid = 1; in_sym = 8'hA5;
      repeat (20) @(negedge clk);
      check("in_ready low while decoding", int'(in_ready), 0);
      in_valid = 0;
      wait (got.size() == N);
      @(negedge clk);
      kesfail = (mu > TT) || (kind == 8);
      if (nu * 2 + mu <= TT) begin
        ok = 1;
        for (int k = 0; k < N; k++) if (got[k] != c[N-1-k]) ok = 0;
        check($sformatf("word %0d corrected (nu=%0d mu=%0d)", w, nu, mu), ok, 1);
        ok = 1;
        for (int k = 0; k < N; k++) if (got_err[k] != int'(isloc[N-1-k])) ok = 0;
        check($sformatf("word %0d errata flags", w), ok, 1);
        check($sformatf("word %0d no fail", w), got_fail, 0);
      end else if (kesfail) begin
        ok = 1;
        for (int k = 0; k < N; k++) if (got[k] != rx[N-1-k]) ok = 0;
        check($sformatf("word %0d passed through", w), ok, 1);
        check($sformatf("word %0d fail (nu=%0d mu=%0d)", w, nu, mu), got_fail, 1);
      end else begin
        // more than T errors: flagged, or decoded to some other codeword
        if (got_fail == 1) n_fail_roots++;
        else begin
          int out_poly[$];
          n_miscorrect++;
          out_poly = {};
          for (int i = 0; i < N; i++) out_poly.push_back(got[N-1-i]);
          ok = 1;
          for (int j = 0; j < TT; j++) if (eval(out_poly, pw(B0 + j)) != 0) ok = 0;
          check($sformatf("word %0d miscorrected to a codeword", w), ok, 1);
        end
      end
    end
    $display("words=%0d kes_runs=%0d swaps=%0d erasure_iters=%0d fail_delta=%0d fail_psi=%0d fail_roots=%0d miscorrect=%0d stalls=%0d blocked=%0d",
             WORDS, n_kes, n_swap, n_first, n_fail_delta, n_fail_psi, n_fail_roots, n_miscorrect, n_stall, n_blocked);
    check("every word through KES", n_kes, WORDS);
    check("mechanism SWAP", int'(n_swap > 0), 1);
    check("mechanism erasure iterations (FIRST)", int'(n_first > 0), 1);
    check("mechanism fail delta>=0", int'(n_fail_delta > 0), 1);
    check("mechanism fail psi0!=0", int'(n_fail_psi > 0), 1);
    check("mechanism fail root count", int'(n_fail_roots > 0), 1);
    check("mechanism input gaps", int'(n_stall > 0), 1);
    check("mechanism input held off", int'(n_blocked > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
