// rs_syndrome: syndrome computation (SC) stage with erasure-location capture.
//
// For a received word R(z) = R_{N-1} z^{N-1} + ... + R_0 it computes the
// 2T syndromes S_j = R(alpha^(B0+j)), 0 <= j < 2T, by Horner's rule: the
// symbols arrive highest degree first, one per clock when in_valid is high,
// and every accumulator is updated as S_j <- S_j * alpha^(B0+j) + R_i
// (a constant multiplier per syndrome).
//
// In the same pass it forms the erasure polynomial
// psi(z) = sum_i X_{i,erasure} z^(i-1) that the key-equation solver needs:
// a symbol of degree i marked by in_erase has location alpha^i, which is
// written into the next free slot of psi. A location register steps from
// alpha^(N-1) down by alpha^-1 per symbol. psi holds 2T+1 locations; the
// (2T+1)-th one is kept so that more than 2T erasures are reported as
// uncorrectable, later ones are dropped.
//
// Timing: after the N-th symbol is taken, done pulses for one cycle and
// syn/psi stay valid until the first symbol of the next word, which clears
// them. The syndromes and the psi(z) formation follow the paper; the
// symbol order, psi length and handshake are this design's choice.
module rs_syndrome
  import gf_pkg::*;
#(
  parameter int unsigned N  = 255,
  parameter int unsigned T  = 8,
  parameter int          B0 = 0,
  localparam int unsigned CW = $clog2(N + 1),
  localparam int unsigned PW = $clog2(2 * T + 2)
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  gf_t  in_sym,
  input  logic in_erase,
  output logic done,
  output gf_t  syn [2*T],
  output gf_t  psi [2*T+1]
);

  localparam gf_t LOC_FIRST = gf_alpha_pow(int'(N) - 1);
  localparam gf_t ALPHA_INV = gf_alpha_pow(-1);

  logic [CW-1:0] count;     // symbols taken of the current word
  logic [PW-1:0] n_eras;    // erasures stored in psi
  gf_t           loc;       // alpha^(degree of the symbol now at the input)
  logic          clear;     // first symbol of a word: restart accumulators

  assign clear = (count == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count  <= '0;
      n_eras <= '0;
      loc    <= LOC_FIRST;
      done   <= 1'b0;
      for (int k = 0; k < 2 * T + 1; k++) psi[k] <= '0;
    end else begin
      done <= 1'b0;
      if (in_valid) begin
        // erasure location capture
        if (clear) begin
          for (int k = 0; k < 2 * T + 1; k++) psi[k] <= '0;
          if (in_erase) begin
            psi[0] <= LOC_FIRST;
            n_eras <= PW'(1);
          end else begin
            n_eras <= '0;
          end
        end else if (in_erase && (n_eras < PW'(2 * T + 1))) begin
          psi[n_eras] <= loc;
          n_eras      <= n_eras + PW'(1);
        end
        // position bookkeeping
        if (count == CW'(N - 1)) begin
          count <= '0;
          loc   <= LOC_FIRST;
          done  <= 1'b1;
        end else begin
          count <= count + CW'(1);
          loc   <= gf_mul_f(loc, ALPHA_INV);
        end
      end
    end
  end

  // One Horner accumulator per syndrome, each with its own constant root.
  for (genvar j = 0; j < 2 * T; j++) begin : g_syn
    localparam gf_t ROOT = gf_alpha_pow(B0 + j);
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)        syn[j] <= '0;
      else if (in_valid) syn[j] <= (clear ? gf_t'(0) : gf_mul_f(syn[j], ROOT)) ^ in_sym;
    end
  end

endmodule
