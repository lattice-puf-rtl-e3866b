// lattice_puf_top: strong PUF whose response is one bit of LWE decryption.
//
// A challenge is a 128-bit seed seed_a' plus, per response bit, an 8-bit b'.
// The LWE secret s (n = 160 elements of Z_256, 1280 bits) never leaves the
// chip: the fuzzy extractor rebuilds it from noisy SRAM power-up bits and
// public helper data. The seed is concatenated with the public counter t,
// loaded into the 256-bit LFSR, and the LFSR output stream, read 8 bits at a
// time, gives a'_1 .. a'_n. lwe_dec computes r = Q(b' - <a', s> mod 256).
// Each further b' uses the next n elements of the same LFSR stream, so a
// 100-bit response costs one 128-bit seed plus 100 bytes of b'.
//
// Ports: the SRAM cells and the helper-data store are not part of this RTL;
// the extractor reads them through sym_addr / raw_bits / helper_bits (one
// 3-bit symbol per clock, read combinationally). key_start begins key
// reconstruction; challenges are refused until key_valid. seed and b' use
// valid/ready handshakes; r is valid during the one-clock r_valid pulse and
// stays on r until the next b' is accepted. t is exported because it is
// public and the verifier needs it to model the challenge.
// Timing: key reconstruction 6,791 clocks; seed load 257 clocks; one
// response 1,441 clocks after b' is accepted.
// The block structure follows the published architecture; the handshakes,
// the serial timing and the symbol read port are this implementation's.
module lattice_puf_top
  import lattice_puf_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  // POK: raw SRAM cells and helper data (external storage)
  input  logic                key_start,
  output logic [$clog2(FE_BLOCKS*BCH_N)-1:0] sym_addr,
  input  logic [REP-1:0]      raw_bits,
  input  logic [REP-1:0]      helper_bits,
  output logic                key_valid,
  output logic                key_fail,
  // challenge
  input  logic                seed_valid,
  output logic                seed_ready,
  input  logic [SEED_W-1:0]   seed,
  input  logic                b_valid,
  output logic                b_ready,
  input  logic [LOG_Q-1:0]    b,
  // response
  output logic                r_valid,
  output logic                r,
  output logic [CNT_W-1:0]    t
);
  logic [KEY_W-1:0]             key;
  logic                         cnt_inc;
  logic                         lfsr_load, lfsr_seed_bit, lfsr_step, lfsr_bit;
  logic                         mac_init, mac_en;
  logic [LOG_Q-1:0]             a_i, s_i;
  logic [$clog2(N_DIM)-1:0]     elem_idx;

  fuzzy_extractor u_fe (
    .clk(clk), .rst_n(rst_n), .start(key_start),
    .sym_addr(sym_addr), .raw_bits(raw_bits), .helper_bits(helper_bits),
    .key(key), .key_valid(key_valid), .key_fail(key_fail)
  );

  puf_counter #(.W(CNT_W)) u_cnt (
    .clk(clk), .rst_n(rst_n), .inc(cnt_inc), .t(t)
  );

  puf_lfsr #(.W(LFSR_W)) u_lfsr (
    .clk(clk), .load(lfsr_load), .seed_bit(lfsr_seed_bit),
    .step(lfsr_step), .out_bit(lfsr_bit), .state()
  );

  puf_controller u_ctrl (
    .clk(clk), .rst_n(rst_n), .key_valid(key_valid),
    .seed_valid(seed_valid), .seed_ready(seed_ready), .seed(seed),
    .t(t), .cnt_inc(cnt_inc),
    .b_valid(b_valid), .b_ready(b_ready),
    .lfsr_load(lfsr_load), .lfsr_seed_bit(lfsr_seed_bit),
    .lfsr_step(lfsr_step), .lfsr_bit(lfsr_bit),
    .mac_init(mac_init), .mac_en(mac_en), .a_i(a_i), .elem_idx(elem_idx),
    .r_valid(r_valid), .state()
  );

  // s_i = sum_j W_(8(i-1)+j) 2^j: element i is key bits [8i +: 8]
  always_comb s_i = key[int'(elem_idx) * LOG_Q +: LOG_Q];

  lwe_dec #(.LOG_Q(LOG_Q)) u_dec (
    .clk(clk), .rst_n(rst_n), .init(mac_init), .b(b),
    .mac_en(mac_en), .a_i(a_i), .s_i(s_i), .y(), .r(r)
  );
endmodule
