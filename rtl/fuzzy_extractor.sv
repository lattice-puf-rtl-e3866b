// fuzzy_extractor: reconstructs the 1280-bit LWE secret from noisy SRAM bits.
//
// Code-offset construction with a concatenated code: at enrollment (done
// outside this block) the helper data was set to raw_bits XOR
// Rep(BCH(key_block)), so at reconstruction raw XOR helper is a noisy copy of
// the concatenated codeword. For each of the BLOCKS outer blocks the
// controller here
//   1. reads the N symbols of the block, one per clock, REP raw bits and REP
//      helper bits each (symbol address sym_addr = block*N + j, read
//      combinationally in the same clock), and majority-decodes them with
//      rep_decoder into bit j of the outer word;
//   2. starts bch_decoder on the N-bit word and waits for it;
//   3. stores the K highest-degree bits of the corrected word (the
//      systematic message part) as key bits [block*K +: K].
// After the last block key_valid rises and stays high until the next start;
// key_fail is set if any outer block reported an uncorrectable word.
// Timing: BLOCKS * (3N + 2T + 3) + 1 clocks from start to key_valid,
// 6,791 at the default sizes.
// Sizes follow the published 5 % raw-BER configuration (repetition [3,1,1],
// BCH [218,128,11], 6,540 cells). The sequencing, the read interface and
// the choice of the message bits are this implementation's.
module fuzzy_extractor
  import lattice_puf_pkg::*;
#(
  parameter int unsigned R      = REP,
  parameter int unsigned N      = BCH_N,
  parameter int unsigned K      = BCH_K,
  parameter int unsigned T      = BCH_T,
  parameter int unsigned BLOCKS = FE_BLOCKS,
  localparam int unsigned AW    = $clog2(BLOCKS * N)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  // symbol-wide read port of the raw SRAM cells and the helper data
  output logic [AW-1:0]       sym_addr,
  input  logic [R-1:0]        raw_bits,
  input  logic [R-1:0]        helper_bits,
  // reconstructed key
  output logic [BLOCKS*K-1:0] key,
  output logic                key_valid,
  output logic                key_fail
);
  typedef enum logic [1:0] {F_IDLE, F_COLLECT, F_DECODE, F_DONE} fe_state_e;

  fe_state_e                 state;
  logic [$clog2(N+1)-1:0]    sym;
  logic [$clog2(BLOCKS)-1:0] blk;
  logic [N-1:0]              word;
  logic                      rep_bit;
  logic                      bch_start, bch_busy, bch_done, bch_fail;
  logic [N-1:0]              bch_word;

  rep_decoder #(.REP(R)) u_rep (
    .raw_bits(raw_bits), .helper_bits(helper_bits), .bit_out(rep_bit)
  );

  bch_decoder #(.N(N), .T(T)) u_bch (
    .clk(clk), .rst_n(rst_n), .start(bch_start), .word_in(word),
    .busy(bch_busy), .done(bch_done), .fail(bch_fail), .word_out(bch_word)
  );

  always_comb begin
    sym_addr  = AW'(blk) * AW'(N) + AW'(sym);
    key_valid = (state == F_DONE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= F_IDLE;
      sym       <= '0;
      blk       <= '0;
      word      <= '0;
      key       <= '0;
      key_fail  <= 1'b0;
      bch_start <= 1'b0;
    end else begin
      bch_start <= 1'b0;
      unique case (state)
        F_IDLE, F_DONE: if (start) begin
          sym      <= '0;
          blk      <= '0;
          key_fail <= 1'b0;
          state    <= F_COLLECT;
        end
        F_COLLECT: begin
          word <= {rep_bit, word[N-1:1]};     // symbol j ends at word[j]
          sym  <= sym + 1'b1;
          if (sym == $clog2(N+1)'(N - 1)) begin
            bch_start <= 1'b1;
            state     <= F_DECODE;
          end
        end
        F_DECODE: if (bch_done) begin
          key[int'(blk) * K +: K] <= bch_word[N-1 -: K];
          key_fail <= key_fail | bch_fail;
          sym      <= '0;
          if (blk == $clog2(BLOCKS)'(BLOCKS - 1)) begin
            state <= F_DONE;
          end else begin
            blk   <= blk + 1'b1;
            state <= F_COLLECT;
          end
        end
        default: state <= F_IDLE;
      endcase
    end
  end
endmodule
