// rs_decoder: errors-and-erasures Reed-Solomon decoder built around the
// fixed-iteration modified Euclidean key-equation solver (Algorithm II).
//
// A received word of N symbols over GF(2^8), highest degree first, enters
// on in_sym with in_valid/in_ready; in_erase marks a symbol as an erasure.
// Any nu errors and mu erasures with 2*nu + mu <= 2T are corrected.
// The three decoding stages run one after another on each word:
//   SC   rs_syndrome     N cycles: syndromes S_0..S_{2T-1} and the
//                        erasure locations psi; the word is written into
//                        rs_buffer at the same time.
//   KES  rs_kes          1 load cycle + exactly 2T iteration cycles,
//                        independent of the number of errata; yields
//                        X(z), V(z) and the failure flag.
//   EC   rs_chien_forney N cycles: reads the word back from the buffer
//                        and corrects it with Chien search and Forney.
// Output: out_sym stream (no backpressure) with out_err marking corrected
// positions and out_last on the last symbol. out_fail, given with
// out_last, flags a word found uncorrectable: the solver ended with
// delta >= 0 or an unprocessed erasure (then the word passes unchanged),
// or the Chien search found a root count different from the locator
// degree (then the output word is not a codeword).
//
// Timing per word: N input cycles, one cycle until the syndromes are
// ready, 2T+1 KES cycles, one cycle to load EC, then N output cycles
// starting two clocks after the first buffer read. in_ready returns high
// once the last buffer read is issued, so the next word can arrive while
// the tail of the previous one drains.
// The stage split and the solver follow the paper; the sequential stage
// schedule, the buffer and the handshakes are this design's choice.
module rs_decoder
  import gf_pkg::*;
#(
  parameter int unsigned N  = 255,
  parameter int unsigned T  = 8,
  parameter int          B0 = 0,
  localparam int unsigned AW = $clog2(N)
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  gf_t  in_sym,
  input  logic in_erase,
  output logic out_valid,
  output gf_t  out_sym,
  output logic out_err,
  output logic out_last,
  output logic out_fail
);

  typedef enum logic [1:0] {S_RECV, S_SYN, S_KES, S_CORR} state_e;

  state_e        state;
  logic [AW-1:0] wcnt, rcnt;
  logic          accept;

  // stage interconnect
  logic syn_done;
  gf_t  syn    [2*T];
  gf_t  psi    [2*T+1];
  logic kes_busy, kes_done, kes_fail;
  gf_t  lambda [2*T+1];
  gf_t  omega  [2*T+1];
  logic signed [$clog2(2*T+2):0] kes_delta;
  gf_t  kes_psi0;
  logic [$clog2(2*T+1)-1:0] kes_eta;
  logic rd_en, rd_valid, rd_last;
  gf_t  rd_data;

  assign in_ready = (state == S_RECV);
  assign accept   = in_valid && in_ready;
  assign rd_en    = (state == S_CORR);

  // ---- sequencing --------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_RECV;
      wcnt     <= '0;
      rcnt     <= '0;
      rd_valid <= 1'b0;
      rd_last  <= 1'b0;
    end else begin
      rd_valid <= rd_en;
      rd_last  <= rd_en && (rcnt == AW'(N - 1));
      unique case (state)
        S_RECV: if (accept) begin
          if (wcnt == AW'(N - 1)) begin
            wcnt  <= '0;
            state <= S_SYN;
          end else begin
            wcnt <= wcnt + AW'(1);
          end
        end
        S_SYN:  if (syn_done) state <= S_KES;
        S_KES:  if (kes_done) begin
          state    <= S_CORR;
          rcnt     <= '0;
        end
        S_CORR: begin
          if (rcnt == AW'(N - 1)) begin
            rcnt  <= '0;
            state <= S_RECV;
          end else begin
            rcnt <= rcnt + AW'(1);
          end
        end
        default: state <= S_RECV;
      endcase
    end
  end

  // ---- stages ------------------------------------------------------------
  rs_syndrome #(.N(N), .T(T), .B0(B0)) u_syndrome (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (accept),
    .in_sym   (in_sym),
    .in_erase (in_erase),
    .done     (syn_done),
    .syn      (syn),
    .psi      (psi)
  );

  rs_buffer #(.DEPTH(N), .WIDTH(GF_M)) u_buffer (
    .clk   (clk),
    .we    (accept),
    .waddr (wcnt),
    .wdata (in_sym),
    .re    (rd_en),
    .raddr (rcnt),
    .rdata (rd_data)
  );

  rs_kes #(.T(T)) u_kes (
    .clk    (clk),
    .rst_n  (rst_n),
    .start  (syn_done),
    .syn    (syn),
    .psi_in (psi),
    .busy   (kes_busy),
    .done   (kes_done),
    .lambda (lambda),
    .omega  (omega),
    .delta  (kes_delta),
    .psi0   (kes_psi0),
    .fail   (kes_fail),
    .eta    (kes_eta)
  );

  rs_chien_forney #(.N(N), .T(T), .B0(B0)) u_ec (
    .clk       (clk),
    .rst_n     (rst_n),
    .load      (kes_done),
    .lambda    (lambda),
    .omega     (omega),
    .fail_in   (kes_fail),
    .eta       (kes_eta),
    .r_valid   (rd_valid),
    .r_sym     (rd_data),
    .r_last    (rd_last),
    .out_valid (out_valid),
    .out_sym   (out_sym),
    .out_err   (out_err),
    .out_last  (out_last),
    .out_fail  (out_fail)
  );

  // The solver is only started from S_SYN and is idle otherwise.
  a_syn_done_state : assert property (@(posedge clk) disable iff (!rst_n)
    syn_done |-> (state == S_SYN && !kes_busy));
  a_kes_done_state : assert property (@(posedge clk) disable iff (!rst_n)
    kes_done |-> (state == S_KES));

endmodule
