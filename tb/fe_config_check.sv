// fe_config_check: one fuzzy-extractor configuration under test, used by
// fe_configs_tb. It instantiates fuzzy_extractor with repetition length R
// and an [N, 128, T] outer BCH code (ten blocks, 1280 key bits) next to a
// behavioural SRAM array of 10*N*R cells. It enrolls a random key with the
// reference encoder, then performs POWERUPS power-ups at BER_PERMILLE raw
// bit error rate and counts a check per reconstruction (key equal to the
// enrolled one, key_fail low). done rises when it has finished.
module fe_config_check
  import bch_ref_pkg::*;
#(
  parameter int R            = 3,
  parameter int N            = 218,
  parameter int T            = 11,
  parameter int BER_PERMILLE = 50,
  parameter int POWERUPS     = 3
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int K      = 128;
  localparam int BLOCKS = 10;
  localparam int CELLS  = BLOCKS * N * R;
  localparam int AW     = $clog2(BLOCKS * N);

  logic start = 0;
  logic [AW-1:0] sym_addr;
  logic [R-1:0] raw_bits, helper_bits;
  logic [BLOCKS*K-1:0] key, key_exp;
  logic key_valid, key_fail;
  logic helper [CELLS];

  fuzzy_extractor #(.R(R), .N(N), .K(K), .T(T), .BLOCKS(BLOCKS)) dut (
    .clk, .rst_n, .start, .sym_addr, .raw_bits, .helper_bits,
    .key, .key_valid, .key_fail);
  sram_pok_model #(.CELLS(CELLS), .REP(R), .AW(AW)) sram (.sym_addr, .raw_bits);

  always_comb
    for (int k = 0; k < R; k++) begin
      int idx;
      idx = int'(sym_addr) * R + k;
      helper_bits[k] = (idx < CELLS) ? helper[idx] : 1'b0;
    end

  initial begin
    logic [MAXP-1:0] g, msg, cw;
    int deg;
    bit ok;
    done = 0;
    checks = 0;
    failures = 0;
    g = gen_poly(T, deg, ok);
    checks++;
    if (!ok || N - deg < K) begin
      failures++;
      $display("FAIL [%0d,%0d,%0d]: generator degree %0d", N, K, T, deg);
    end
    for (int i = 0; i < BLOCKS * K / 32; i++) key_exp[i*32 +: 32] = $urandom;
    sram.manufacture();
    for (int bk = 0; bk < BLOCKS; bk++) begin
      msg = MAXP'(key_exp[bk*K +: K]) << (N - deg - K);
      cw  = encode(msg, N - deg, g, deg);
      for (int j = 0; j < N; j++)
        for (int k = 0; k < R; k++)
          helper[(bk*N + j)*R + k] = sram.nominal[(bk*N + j)*R + k] ^ cw[j];
    end
    wait (rst_n);
    for (int p = 0; p < POWERUPS; p++) begin
      sram.power_up(BER_PERMILLE);
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      while (!key_valid) @(negedge clk);
      checks++;
      if (key != key_exp || key_fail) begin
        failures++;
        $display("FAIL rep %0d x [%0d,%0d,%0d] at %0d permille: key wrong", R, N, K, T, BER_PERMILLE);
      end
      $display("rep %0d x BCH [%0d,%0d,%0d], %0d cells, %0d.%0d %% BER: %0d cells flipped, key %s",
               R, N, K, T, CELLS, BER_PERMILLE / 10, BER_PERMILLE % 10, sram.last_flips,
               (key == key_exp && !key_fail) ? "recovered" : "WRONG");
    end
    done = 1;
  end
endmodule
