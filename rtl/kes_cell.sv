// kes_cell: one coefficient slice of the modified-Euclidean key-equation
// solver (Algorithm II).
//
// Cell i holds coefficient i of the four polynomials U, V, W, X. On a clock
// with step high it applies one iteration of the algorithm, all four
// updates taken from the old values at once:
//   V_i <- gamma * V_{i-1} - xi * (FIRST ? V_i : U_i)
//   X_i <- gamma * X_{i-1} - xi * (FIRST ? X_i : W_i)
//   U_i <- SWAP ? V_{i-1} : U_i
//   W_i <- SWAP ? X_{i-1} : W_i
// where V_{i-1}, X_{i-1} (inputs v_lo, x_lo, from the next lower cell) are
// coefficient i of zV(z) and zX(z). Subtraction is XOR in GF(2^m). gamma,
// xi, FIRST and SWAP are computed once by the controller and broadcast to
// every cell. load (taking priority over step) writes the initial values.
// The update equations are the paper's; the partition into one cell per
// coefficient with four general multipliers is this design's choice.
module kes_cell
  import gf_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic load,
  input  logic step,
  input  gf_t  init_u,
  input  gf_t  init_v,
  input  gf_t  init_w,
  input  gf_t  init_x,
  input  logic first,
  input  logic swap,
  input  gf_t  gamma,
  input  gf_t  xi,
  input  gf_t  v_lo,
  input  gf_t  x_lo,
  output gf_t  u,
  output gf_t  v,
  output gf_t  w,
  output gf_t  x
);

  gf_t gv, xv, gx, xx;   // gamma*zV, xi*(V|U), gamma*zX, xi*(X|W)
  gf_t sel_v, sel_x;

  assign sel_v = first ? v : u;
  assign sel_x = first ? x : w;

  gf_mul u_mul_gv (.a(gamma), .b(v_lo),  .p(gv));
  gf_mul u_mul_xv (.a(xi),    .b(sel_v), .p(xv));
  gf_mul u_mul_gx (.a(gamma), .b(x_lo),  .p(gx));
  gf_mul u_mul_xx (.a(xi),    .b(sel_x), .p(xx));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      u <= '0;
      v <= '0;
      w <= '0;
      x <= '0;
    end else if (load) begin
      u <= init_u;
      v <= init_v;
      w <= init_w;
      x <= init_x;
    end else if (step) begin
      v <= gv ^ xv;
      x <= gx ^ xx;
      if (swap) begin
        u <= v_lo;
        w <= x_lo;
      end
    end
  end

endmodule
