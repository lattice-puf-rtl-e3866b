// bch_decoder: decoder of the outer shortened binary BCH code.
//
// Corrects up to T bit errors in an N-bit word of a binary BCH code over
// GF(2^8) with designed distance 2T+1, shortened from length 255 to N.
// Bit p of word_in is the coefficient of x^p of the received polynomial.
// Three phases, each a simple serial loop:
//   SYND  - N clocks: Horner evaluation of the 2T syndromes S_j = r(alpha^j),
//           all in parallel, highest-degree bit first.
//   BM    - 2T clocks: inversion-less Berlekamp-Massey, one iteration per
//           clock, giving the error-locator polynomial Lambda(x) of degree
//           at most T.
//   CHIEN - N clocks: evaluates Lambda(alpha^-p) for p = 0 .. N-1; a root
//           marks an error at position p, whose bit is flipped. The word
//           rotates through a shift register so that bit p is at index 0.
// done pulses for one clock with the corrected word; fail is set when the
// number of roots found differs from the degree of Lambda (more than T
// errors detected). Latency from start: 2N + 2T + 2 clocks (482 at N = 218,
// T = 11). start is ignored while busy.
// The published design gives only the code parameters; this architecture,
// the field polynomial and the bit ordering are this implementation's.
module bch_decoder
  import lattice_puf_pkg::*;
#(
  parameter int unsigned N = BCH_N,
  parameter int unsigned T = BCH_T
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [N-1:0] word_in,
  output logic         busy,
  output logic         done,
  output logic         fail,
  output logic [N-1:0] word_out
);
  typedef enum logic [2:0] {S_IDLE, S_SYND, S_BM, S_CHIEN, S_FIN} bch_state_e;

  localparam int unsigned CW = $clog2(N + 1);

  bch_state_e     state;
  logic [CW-1:0]  cnt;
  logic [N-1:0]   word;
  gf_t            synd   [2*T];
  gf_t            lambda [T+1];
  gf_t            bpoly  [T+1];
  gf_t            gamma;
  int             kreg;
  gf_t            term   [T+1];
  logic [CW-1:0]  roots;

  // combinational helpers
  gf_t            delta;
  gf_t            chien_sum;
  logic [CW-1:0]  lambda_deg;

  always_comb begin
    // discrepancy of BM iteration cnt: sum_i S_(cnt-i) * lambda_i (0-based S)
    delta = '0;
    for (int i = 0; i <= T; i++) begin
      if (int'(cnt) - i >= 0 && int'(cnt) - i < 2 * T)
        delta ^= gf_mul(synd[int'(cnt) - i], lambda[i]);
    end
    chien_sum = '0;
    for (int k = 0; k <= T; k++) chien_sum ^= term[k];
    lambda_deg = '0;
    for (int k = 1; k <= T; k++) if (lambda[k] != '0) lambda_deg = CW'(k);
  end

  always_comb busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      cnt      <= '0;
      word     <= '0;
      word_out <= '0;
      done     <= 1'b0;
      fail     <= 1'b0;
      gamma    <= '0;
      kreg     <= 0;
      roots    <= '0;
      for (int j = 0; j < 2 * T; j++) synd[j] <= '0;
      for (int k = 0; k <= T; k++) begin
        lambda[k] <= '0;
        bpoly[k]  <= '0;
        term[k]   <= '0;
      end
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          word  <= word_in;
          cnt   <= '0;
          for (int j = 0; j < 2 * T; j++) synd[j] <= '0;
          state <= S_SYND;
        end
        S_SYND: begin
          // S_j <- S_j * alpha^j + r_(N-1-cnt)
          for (int j = 0; j < 2 * T; j++)
            synd[j] <= gf_mul(synd[j], gf_alpha_pow(j + 1)) ^ gf_t'(word[N - 1 - int'(cnt)]);
          cnt <= cnt + 1'b1;
          if (cnt == CW'(N - 1)) begin
            cnt   <= '0;
            gamma <= gf_t'(1);
            kreg  <= 0;
            for (int k = 0; k <= T; k++) begin
              lambda[k] <= (k == 0) ? gf_t'(1) : '0;
              bpoly[k]  <= (k == 0) ? gf_t'(1) : '0;
            end
            state <= S_BM;
          end
        end
        S_BM: begin
          for (int k = 0; k <= T; k++)
            lambda[k] <= gf_mul(gamma, lambda[k]) ^
                         ((k == 0) ? '0 : gf_mul(delta, bpoly[k-1]));
          if (delta != '0 && kreg >= 0) begin
            for (int k = 0; k <= T; k++) bpoly[k] <= lambda[k];
            gamma <= delta;
            kreg  <= -kreg - 1;
          end else begin
            for (int k = 0; k <= T; k++) bpoly[k] <= (k == 0) ? '0 : bpoly[k-1];
            kreg <= kreg + 1;
          end
          cnt <= cnt + 1'b1;
          if (cnt == CW'(2 * T - 1)) begin
            cnt   <= '0;
            roots <= '0;
            state <= S_CHIEN;
            // the terms take the final lambda, computed this clock
            for (int k = 0; k <= T; k++)
              term[k] <= gf_mul(gamma, lambda[k]) ^
                         ((k == 0) ? '0 : gf_mul(delta, bpoly[k-1]));
          end
        end
        S_CHIEN: begin
          // position cnt sits at word[0]; rotate it to the top afterwards
          word <= {word[0] ^ (chien_sum == '0), word[N-1:1]};
          if (chien_sum == '0) roots <= roots + 1'b1;
          for (int k = 0; k <= T; k++)
            term[k] <= gf_mul(term[k], gf_alpha_pow((255 - k) % 255));
          cnt <= cnt + 1'b1;
          if (cnt == CW'(N - 1)) state <= S_FIN;
        end
        S_FIN: begin
          word_out <= word;
          fail     <= (roots != lambda_deg);
          done     <= 1'b1;
          state    <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
