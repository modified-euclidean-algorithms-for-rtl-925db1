// tb_rs_workloads: the decoder on two shortened byte-oriented RS codes of
// the kind used in optical discs, with random errors and erasures.
//   - RS(208,192), T = 8, on the default decoder (N = 255): the word is
//     sent as 47 leading zero symbols followed by the 208 code symbols, the
//     usual way to run a shortened code on a full-length decoder; the
//     leading zeros must come back unchanged.
//   - RS(32,28), T = 2, on a decoder built with N = 32, T = 2.
// Both use generator roots alpha^0 .. alpha^(2T-1) over the field of
// gf_pkg. Every correctable pattern must decode to the sent codeword.
module tb_rs_workloads;
  import tb_gf_pkg::*;

  localparam int NW = 40;   // words per code

  logic       clk = 0, rst_n = 0;
  logic       in_valid [2], in_erase [2], in_ready [2];
  logic [7:0] in_sym [2];
  logic       out_valid [2], out_err [2], out_last [2], out_fail [2];
  logic [7:0] out_sym [2];
  int checks = 0, failures = 0;

  rs_decoder dut_long (
    .clk, .rst_n, .in_valid(in_valid[0]), .in_ready(in_ready[0]), .in_sym(in_sym[0]),
    .in_erase(in_erase[0]), .out_valid(out_valid[0]), .out_sym(out_sym[0]),
    .out_err(out_err[0]), .out_last(out_last[0]), .out_fail(out_fail[0]));
  rs_decoder #(.N(32), .T(2)) dut_short (
    .clk, .rst_n, .in_valid(in_valid[1]), .in_ready(in_ready[1]), .in_sym(in_sym[1]),
    .in_erase(in_erase[1]), .out_valid(out_valid[1]), .out_sym(out_sym[1]),
    .out_err(out_err[1]), .out_last(out_last[1]), .out_fail(out_fail[1]));

  always #5 clk = ~clk;

  initial begin
    repeat (NW * 2000) @(posedge clk);
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

  int got [2][$];
  int got_fail [2];
  for (genvar d = 0; d < 2; d++) begin : g_mon
    always @(posedge clk) if (rst_n && out_valid[d]) begin
      got[d].push_back(int'(out_sym[d]));
      if (out_last[d]) got_fail[d] = int'(out_fail[d]);
    end
  end

  // send one word of n_code code symbols (padded to n_dec) and check it
  task automatic run(int d, int n_dec, int n_code, int t);
    int c[$], rx[$], pos[$];
    bit erased [$];
    int nu, mu, ok;
    mu = $urandom_range(2 * t);
    nu = $urandom_range((2 * t - mu) / 2);
    codeword(n_code, t, 0, c);
    for (int i = n_code; i < n_dec; i++) c.push_back(0);   // shortening
    rx = c;
    erased = {};
    for (int i = 0; i < n_dec; i++) erased.push_back(0);
    pos = {};
    while (pos.size() < nu + mu) begin
      int p, dup;
      p = $urandom_range(n_code - 1);
      dup = 0;
      foreach (pos[q]) if (pos[q] == p) dup = 1;
      if (dup == 0) pos.push_back(p);
    end
    foreach (pos[q]) begin
      if (q < mu) begin erased[pos[q]] = 1; rx[pos[q]] = 0; end
      else rx[pos[q]] = c[pos[q]] ^ $urandom_range(1, 255);
    end
    got[d] = {};
    got_fail[d] = -1;
    for (int k = 0; k < n_dec; k++) begin
      @(negedge clk);
      in_valid[d] = 1;
      in_sym[d]   = 8'(rx[n_dec - 1 - k]);
      in_erase[d] = erased[n_dec - 1 - k];
      @(posedge clk);
      while (!in_ready[d]) @(posedge clk);
    end
    @(negedge clk);
    in_valid[d] = 0;
    in_erase[d] = 0;
    wait (got[d].size() == n_dec);
    ok = 1;
    for (int k = 0; k < n_dec; k++) if (got[d][k] != c[n_dec - 1 - k]) ok = 0;
    check($sformatf("RS(%0d,%0d) nu=%0d mu=%0d decoded", n_code, n_code - 2 * t, nu, mu), ok, 1);
    check("no fail", got_fail[d], 0);
  endtask

  initial begin
    for (int d = 0; d < 2; d++) begin
      in_valid[d] = 0; in_erase[d] = 0; in_sym[d] = 0;
    end
    init();
    repeat (3) @(negedge clk);
    rst_n = 1;
    fork
      for (int w = 0; w < NW; w++) run(0, 255, 208, 8);
      for (int w = 0; w < NW; w++) run(1, 32, 32, 2);
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
