// rs_kes: key-equation solver by the modified Euclidean algorithm with
// erasures (Algorithm II), exactly 2T iterations, one per clock.
//
// Given the syndromes S_0..S_{2T-1} and the erasure locations psi_0..psi_2T
// (zero-padded), it computes polynomials X(z) and V(z) whose coefficients
// 0..2T are returned on lambda and omega. If 2*nu + mu <= 2T (nu errors,
// mu erasures, eta = nu + mu), then at the end
//   X(z) = beta * z^(2T-eta) * Lambda(z)  (errata locator, Lambda(0) = 1)
//   V(z) = beta * z^(2T-eta) * Omega(z)   (errata evaluator)
// for some nonzero beta, and delta < 0, psi_0 = 0. Otherwise fail is set
// (delta >= 0 or psi_0 != 0). The z^k and beta factors cancel in the
// Chien search and Forney's formula, so no degree is ever computed.
//
// Iteration (all at once, per clock):
//   FIRST = psi_0 != 0           (an erasure location is still pending)
//   SWAP  = !FIRST && V_{2T-1} != 0 && delta < 0
//   (gamma, xi) = FIRST ? (psi_0, 1) : (U_2T, V_{2T-1})
//   delta <- SWAP ? -delta-1 : FIRST ? delta : delta-1
//   psi   <- psi / z (shift down, zero fill)
// and the per-coefficient updates of kes_cell. While FIRST holds the
// iterations multiply V and X by (1 - psi_0 z), building the modified
// syndrome and the erasure locator in the same registers; afterwards the
// iterations are those of the errors-only Algorithm I*. With no erasures
// the block is exactly Algorithm I*.
//
// Initial values: delta = -1, U = z^2T, V = S(z), W = 0, X = 1.
// Registers keep coefficients 0..2T; terms that zV, zX push above z^2T are
// dropped, which cannot change coefficients 0..2T.
//
// eta, derived from delta and the number of erasure steps, is the degree
// of the errata locator when the word is correctable; the correction stage
// uses it to detect words that carry more than T errors but still end
// with delta < 0 (a check the paper does not give; see below).
//
// Timing: start (when not busy) loads the registers; the 2T iterations run
// in the following 2T cycles with busy high; done pulses in the cycle
// after the last one, so done comes 2T+1 cycles after start. Outputs hold
// until the next start. The algorithm is the paper's; the one-iteration-
// per-clock schedule and the handshake are this design's choice.
module rs_kes
  import gf_pkg::*;
#(
  parameter int unsigned T = 8,
  localparam int unsigned DW = $clog2(2 * T + 2) + 1,  // signed delta width
  localparam int unsigned IW = $clog2(2 * T + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  gf_t                  syn    [2*T],
  input  gf_t                  psi_in [2*T+1],
  output logic                 busy,
  output logic                 done,
  output gf_t                  lambda [2*T+1],
  output gf_t                  omega  [2*T+1],
  output logic signed [DW-1:0] delta,
  output gf_t                  psi0,
  output logic                 fail,
  output logic [IW-1:0]        eta
);

  localparam int unsigned TT = 2 * T;
  localparam logic signed [DW-1:0] DMAX = DW'(TT + 1);

  gf_t           psi [TT+1];
  logic [IW-1:0] iter;
  logic [IW-1:0] mu;        // erasure iterations (FIRST = 1) so far
  logic          load;
  logic          first, swap;
  gf_t           gamma, xi;

  gf_t u [TT+1];
  gf_t v [TT+1];
  gf_t w [TT+1];
  gf_t x [TT+1];

  assign load  = start && !busy;
  assign first = (psi[0] != '0);
  assign swap  = !first && (v[TT-1] != '0) && (delta < 0);
  assign gamma = first ? psi[0] : u[TT];
  assign xi    = first ? gf_t'(1) : v[TT-1];

  // ---- coefficient cells -------------------------------------------------
  for (genvar i = 0; i <= TT; i++) begin : g_cell
    gf_t v_lo, x_lo;
    if (i == 0) begin : g_bottom
      assign v_lo = '0;
      assign x_lo = '0;
    end else begin : g_link
      assign v_lo = v[i-1];
      assign x_lo = x[i-1];
    end
    kes_cell u_cell (
      .clk    (clk),
      .rst_n  (rst_n),
      .load   (load),
      .step   (busy),
      .init_u ((i == TT) ? gf_t'(1) : gf_t'(0)),
      .init_v ((i <  TT) ? syn[(i < TT) ? i : 0] : gf_t'(0)),
      .init_w (gf_t'(0)),
      .init_x ((i == 0)  ? gf_t'(1) : gf_t'(0)),
      .first  (first),
      .swap   (swap),
      .gamma  (gamma),
      .xi     (xi),
      .v_lo   (v_lo),
      .x_lo   (x_lo),
      .u      (u[i]),
      .v      (v[i]),
      .w      (w[i]),
      .x      (x[i])
    );
  end

  // ---- control: delta, psi shift register, iteration count --------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      iter  <= '0;
      mu    <= '0;
      delta <= -DW'(1);
      for (int k = 0; k <= TT; k++) psi[k] <= '0;
    end else begin
      done <= 1'b0;
      if (load) begin
        busy  <= 1'b1;
        iter  <= '0;
        mu    <= '0;
        delta <= -DW'(1);
        for (int k = 0; k <= TT; k++) psi[k] <= psi_in[k];
      end else if (busy) begin
        if (swap)       delta <= -delta - DW'(1);
        else if (!first) delta <= delta - DW'(1);
        if (first)       mu    <= mu + IW'(1);
        for (int k = 0; k < TT; k++) psi[k] <= psi[k+1];
        psi[TT] <= '0;
        if (iter == IW'(TT - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
        iter <= iter + IW'(1);
      end
    end
  end

  assign lambda = x;
  // V_2T is always zero after an errors step (U_2T*V_2T-1 - V_2T-1*U_2T);
  // after an erasure step it holds the z^2T term of V(z)(1 - psi_0 z),
  // which lies outside the modified syndrome (taken mod z^2T) and is
  // shifted out by the next iteration. It is therefore not an output.
  for (genvar i = 0; i < TT; i++) begin : g_omega
    assign omega[i] = v[i];
  end
  assign omega[TT] = '0;
  assign psi0   = psi[0];
  assign fail   = (delta >= 0) || (psi[0] != '0);

  // Degree of the errata locator implied by the run: each erasure step
  // leaves delta alone and the errors steps end at delta = 2nu + mu - 2T - 1
  // (2nu - 2T - 1 of Theorem 1 for the 2T - mu errors steps), so
  // eta = nu + mu = (delta + 2T + 1 + mu) / 2. Meaningful when fail = 0;
  // the correction stage compares it with the number of roots it finds.
  logic signed [DW+1:0] eta_sum;
  assign eta_sum = (DW+2)'(delta) + (DW+2)'(TT + 1) + (DW+2)'(mu);
  assign eta     = IW'(eta_sum >>> 1);

  // delta moves by one step per iteration from -1, so it can never leave
  // [-(2T+1), 2T+1]; a violation means the register is too narrow.
  a_delta_range : assert property (@(posedge clk) disable iff (!rst_n)
    (delta <= DMAX) && (delta >= -DMAX));
  // SWAP is never taken while an erasure location is being absorbed.
  a_no_swap_first : assert property (@(posedge clk) disable iff (!rst_n)
    !(busy && first && swap));

endmodule
