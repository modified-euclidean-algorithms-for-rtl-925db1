// tb_kes_cell: drives one key-equation cell with random coefficients and
// random broadcast controls (gamma, xi, FIRST, SWAP) and checks every
// register after load, after a step and after an idle clock against the
// Algorithm II update equations evaluated with the reference field
// arithmetic.
module tb_kes_cell;
  import tb_gf_pkg::*;

  logic       clk = 0, rst_n = 0;
  logic       load = 0, step = 0, first = 0, swap = 0;
  logic [7:0] init_u = 0, init_v = 0, init_w = 0, init_x = 0;
  logic [7:0] gamma = 0, xi = 0, v_lo = 0, x_lo = 0;
  logic [7:0] u, v, w, x;
  int checks = 0, failures = 0;

  kes_cell dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
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
    int eu, ev, ew, ex, nv, nx;
    init();
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 2000; it++) begin
      // load random state
      @(negedge clk);
      load = 1; step = $urandom_range(1);   // load has priority over step
      init_u = 8'($urandom_range(255)); init_v = 8'($urandom_range(255));
      init_w = 8'($urandom_range(255)); init_x = 8'($urandom_range(255));
      eu = init_u; ev = init_v; ew = init_w; ex = init_x;
      @(negedge clk);
      load = 0; step = 0;
      check("load u", u, eu); check("load v", v, ev);
      check("load w", w, ew); check("load x", x, ex);
      // one iteration
      first = $urandom_range(1);
      swap  = first ? 1'b0 : 1'($urandom_range(1));
      gamma = 8'($urandom_range(255)); xi = 8'($urandom_range(255));
      v_lo  = 8'($urandom_range(255)); x_lo = 8'($urandom_range(255));
      step  = 1;
      nv = mul(gamma, v_lo) ^ mul(xi, first ? ev : eu);
      nx = mul(gamma, x_lo) ^ mul(xi, first ? ex : ew);
      if (swap) begin eu = v_lo; ew = x_lo; end
      ev = nv; ex = nx;
      @(negedge clk);
      step = 0;
      check("step u", u, eu); check("step v", v, ev);
      check("step w", w, ew); check("step x", x, ex);
      // idle clock: nothing changes
      gamma = 8'($urandom_range(255));
      @(negedge clk);
      check("hold v", v, ev); check("hold x", x, ex);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
