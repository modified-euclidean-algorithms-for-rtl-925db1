// tb_rs_syndrome: feeds random received words with random erasure marks
// (including none and more than 2T+1) into the syndrome stage, with gaps in
// in_valid, and compares S_0..S_{2T-1} with direct polynomial evaluation
// R(alpha^(B0+j)) and psi with the list of erased locations alpha^i in
// arrival order. Also checks that done comes one clock after the N-th
// symbol and that the results stay held afterwards.
module tb_rs_syndrome;
  import tb_gf_pkg::*;

  localparam int N = 255, T = 8, B0 = 0;

  logic       clk = 0, rst_n = 0;
  logic       in_valid = 0, in_erase = 0;
  logic [7:0] in_sym = 0;
  logic       done;
  logic [7:0] syn [2*T];
  logic [7:0] psi [2*T+1];
  int checks = 0, failures = 0;

  rs_syndrome #(.N(N), .T(T), .B0(B0)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  initial begin
    int r[$];
    int e_loc[$];
    int n_er;
    init();
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int word = 0; word < 12; word++) begin
      r = {};
      e_loc = {};
      n_er = (word == 0) ? 0 : (word == 1) ? 20 : $urandom_range(2 * T + 1);
      for (int i = 0; i < N; i++) r.push_back($urandom_range(255));
      // symbols are sent highest degree first
      for (int k = 0; k < N; k++) begin
        int i;
        i = N - 1 - k;
        @(negedge clk);
        if ($urandom_range(3) == 0) begin   // idle cycle
          in_valid = 0;
          @(negedge clk);
        end
        in_valid = 1;
        in_sym   = 8'(r[i]);
        in_erase = ($urandom_range(N - 1) < n_er);
        if (in_erase) e_loc.push_back(pw(i));
        @(posedge clk);
        #1;
        if (k < N - 1) check("done early", int'(done), 0);
      end
      @(negedge clk);
      in_valid = 0;
      in_erase = 0;
      check("done", int'(done), 1);
      repeat (3) @(negedge clk);   // results must hold
      for (int j = 0; j < 2 * T; j++)
        check($sformatf("S_%0d", j), int'(syn[j]), eval(r, pw(B0 + j)));
      for (int k = 0; k < 2 * T + 1; k++)
        check($sformatf("psi_%0d", k), int'(psi[k]), (k < e_loc.size()) ? e_loc[k] : 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
