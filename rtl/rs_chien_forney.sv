// rs_chien_forney: errata correction (EC) stage, Chien search plus
// Forney's formula, one symbol per clock.
//
// It takes X(z) and V(z) from the key-equation solver, i.e. scaled and
// shifted copies beta*z^k*Lambda(z) and beta*z^k*Omega(z), and corrects
// the received word as it is streamed through, highest degree first
// (symbol R_j with j = N-1 first). For the symbol of degree j it evaluates
// at z = alpha^-j:
//   X(z)       = sum_i X_i z^i          -> zero means an errata location
//   z X'(z)    = sum_{i odd} X_i z^i    (formal derivative, char. 2)
//   e_j        = z^B0 * V(z) / (z X'(z))
// and outputs R_j + e_j at a root, R_j elsewhere. At a root Lambda(z)=0,
// so z X'(z) = beta z^k z Lambda'(z) and the beta z^k factors cancel
// against those of V(z): the shifted, scaled polynomials give the same
// locations and values as Lambda and Omega.
//
// Each term X_i z^i, V_i z^i is kept in a register; load sets it to
// X_i alpha^(-(N-1)i), and every accepted symbol multiplies it by alpha^i
// (a constant multiplier), the usual Chien recursion. z^B0 is stepped the
// same way. The division uses a combinational Fermat inverter.
//
// If fail_in is set at load (uncorrectable word) symbols pass unchanged.
// The roots found are counted; with the last symbol (r_last) out_fail
// reports the word as uncorrectable if fail_in was set or the count
// differs from eta, the locator degree the solver derived from its final
// delta. The count check is this design's addition: a word with more
// than T errors can end the solver with delta < 0 and a locator whose
// roots are not all among the code positions.
// Timing: out_valid/out_sym/out_err/out_last/out_fail follow r_valid,
// r_sym, r_last by one clock.
// Chien search and Forney's formula are the paper's equations; the serial
// one-symbol-per-clock structure is this design's choice.
module rs_chien_forney
  import gf_pkg::*;
#(
  parameter int unsigned N  = 255,
  parameter int unsigned T  = 8,
  parameter int          B0 = 0
) (
  input  logic clk,
  input  logic rst_n,
  input  logic load,
  input  gf_t  lambda [2*T+1],
  input  gf_t  omega  [2*T+1],
  input  logic fail_in,
  input  logic [$clog2(2*T+1)-1:0] eta,
  input  logic r_valid,
  input  gf_t  r_sym,
  input  logic r_last,
  output logic out_valid,
  output gf_t  out_sym,
  output logic out_err,
  output logic out_last,
  output logic out_fail
);

  localparam int unsigned TT = 2 * T;
  localparam int unsigned EW = $clog2(2 * T + 1);
  localparam int unsigned RW = $clog2(N + 1);

  gf_t  cx [TT+1];   // X_i z^i for the current z
  gf_t  cv [TT+1];   // V_i z^i for the current z
  gf_t  zb;          // z^B0
  logic fail_q;
  logic [EW-1:0] eta_q;
  logic [RW-1:0] n_roots;   // roots of X(z) found so far in this word
  logic          x_zero;

  gf_t  x_sum, x_odd, v_sum, err_val;
  logic is_root;

  // ---- per-coefficient Chien registers ----------------------------------
  for (genvar i = 0; i <= TT; i++) begin : g_term
    localparam gf_t START = gf_alpha_pow(-(int'(N) - 1) * i);
    localparam gf_t STEP  = gf_alpha_pow(i);
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        cx[i] <= '0;
        cv[i] <= '0;
      end else if (load) begin
        cx[i] <= gf_mul_f(lambda[i], START);
        cv[i] <= gf_mul_f(omega[i],  START);
      end else if (r_valid) begin
        cx[i] <= gf_mul_f(cx[i], STEP);
        cv[i] <= gf_mul_f(cv[i], STEP);
      end
    end
  end

  // ---- evaluation and Forney's formula ----------------------------------
  always_comb begin
    x_sum = '0;
    x_odd = '0;
    v_sum = '0;
    for (int i = 0; i <= TT; i++) begin
      x_sum ^= cx[i];
      v_sum ^= cv[i];
      if (i % 2 == 1) x_odd ^= cx[i];
    end
    x_zero  = (x_sum == '0);
    is_root = x_zero && !fail_q;
    err_val = gf_mul_f(gf_mul_f(zb, v_sum), gf_inv_f(x_odd));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      zb        <= gf_t'(1);
      fail_q    <= 1'b0;
      out_valid <= 1'b0;
      out_sym   <= '0;
      out_err   <= 1'b0;
      out_last  <= 1'b0;
      out_fail  <= 1'b0;
      eta_q     <= '0;
      n_roots   <= '0;
    end else begin
      out_valid <= r_valid && !load;
      if (load) begin
        zb      <= gf_alpha_pow(-(int'(N) - 1) * B0);
        fail_q  <= fail_in;
        eta_q   <= eta;
        n_roots <= '0;
      end else if (r_valid) begin
        zb       <= gf_mul_f(zb, gf_alpha_pow(B0));
        out_sym  <= is_root ? (r_sym ^ err_val) : r_sym;
        out_err  <= is_root;
        out_last <= r_last;
        n_roots  <= n_roots + RW'(x_zero);
        // word verdict, given with the last symbol
        out_fail <= r_last && (fail_q ||
                    (n_roots + RW'(x_zero) != RW'(eta_q)));
      end
    end
  end

endmodule
