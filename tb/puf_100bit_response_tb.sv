// puf_100bit_response_tb: the direct-authentication workload at full size.
// One 128-bit seed followed by 100 values of b' yields a 100-bit response
// string. The testbench enrolls a key, powers up the SRAM model with 5 %
// cell errors, then
//  - sends 100 genuine ciphertexts (b' = <a',s> + e + r*q/2, |e| <= 40) and
//    checks all 100 response bits equal the encrypted bits,
//  - checks the whole string takes at most 257 + 100 * 1443 clocks from seed
//    acceptance (4.34 ms at 33.3 MHz, against about 4.4 ms published),
//  - with a second seed sends 100 random b' and checks the responses against
//    the reference decryption, reporting the fraction of ones (uniformity);
//    it must lie within 30 .. 70 %.
module puf_100bit_response_tb;
  import lattice_puf_pkg::*;
  import bch_ref_pkg::*;
  localparam int AW = $clog2(FE_BLOCKS * BCH_N);
  localparam int NRESP = 100;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic key_start = 0, seed_valid = 0, b_valid = 0;
  logic [AW-1:0] sym_addr;
  logic [REP-1:0] raw_bits, helper_bits;
  logic key_valid, key_fail, seed_ready, b_ready, r_valid, r;
  logic [SEED_W-1:0] seed = '0;
  logic [LOG_Q-1:0] b = '0;
  logic [CNT_W-1:0] t;
  logic helper [RAW_BITS];
  logic [KEY_W-1:0] key_exp;
  logic [LFSR_W-1:0] ref_lfsr;
  longint cyc = 0;

  lattice_puf_top dut (.*);
  sram_pok_model #(.CELLS(RAW_BITS), .REP(REP), .AW(AW)) sram (.sym_addr, .raw_bits);

  always_comb
    for (int k = 0; k < REP; k++) begin
      int idx;
      idx = int'(sym_addr) * REP + k;
      helper_bits[k] = (idx < RAW_BITS) ? helper[idx] : 1'b0;
    end

  always #15 clk = ~clk;       // 30 ns period, about 33.3 MHz
  always @(posedge clk) cyc <= cyc + 1;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", msg);
    end
  endtask

  function automatic int next_dot();
    int dot;
    dot = 0;
    for (int i = 0; i < N_DIM; i++) begin
      int a;
      a = 0;
      for (int j = 0; j < LOG_Q; j++) begin
        logic fb;
        fb = ref_lfsr[255] ^ ref_lfsr[253] ^ ref_lfsr[250] ^ ref_lfsr[245];
        ref_lfsr = {ref_lfsr[LFSR_W-2:0], fb};
        a |= int'(fb) << j;
      end
      dot += a * int'(key_exp[i*LOG_Q +: LOG_Q]);
    end
    return dot % 256;
  endfunction

  task automatic enroll();
    logic [MAXP-1:0] g, msg, cw;
    int deg;
    bit ok;
    g = gen_poly(BCH_T, deg, ok);
    for (int i = 0; i < KEY_W / 32; i++) key_exp[i*32 +: 32] = $urandom;
    sram.manufacture();
    for (int bk = 0; bk < FE_BLOCKS; bk++) begin
      msg = MAXP'(key_exp[bk*BCH_K +: BCH_K]) << (BCH_N - deg - BCH_K);
      cw  = encode(msg, BCH_N - deg, g, deg);
      for (int j = 0; j < BCH_N; j++)
        for (int k = 0; k < REP; k++)
          helper[(bk*BCH_N + j)*REP + k] = sram.nominal[(bk*BCH_N + j)*REP + k] ^ cw[j];
    end
  endtask

  task automatic send_seed(input logic [SEED_W-1:0] sv);
    ref_lfsr = {sv, t};
    seed = sv; seed_valid = 1;
    @(posedge clk);
    while (!seed_ready) @(posedge clk);
    @(negedge clk);
    seed_valid = 0;
  endtask

  task automatic one_response(input logic [LOG_Q-1:0] bv, output logic rb);
    b = bv; b_valid = 1;
    @(posedge clk);
    while (!b_ready) @(posedge clk);
    @(negedge clk);
    b_valid = 0;
    while (!r_valid) @(negedge clk);
    rb = r;
  endtask

  initial begin
    logic [SEED_W-1:0] sv;
    longint c0;
    int ones, wrong;
    repeat (2) @(negedge clk);
    rst_n = 1;
    enroll();
    sram.power_up(50);
    key_start = 1;
    @(negedge clk);
    key_start = 0;
    while (!key_valid) @(negedge clk);
    chk(!key_fail, "key rebuilt");

    // 100 ciphertexts
    for (int i = 0; i < SEED_W / 32; i++) sv[i*32 +: 32] = $urandom;
    c0 = cyc;
    send_seed(sv);
    wrong = 0;
    for (int k = 0; k < NRESP; k++) begin
      int dot, e, rbit;
      logic got;
      dot  = next_dot();
      e    = int'($urandom % 81) - 40;
      rbit = $urandom % 2;
      one_response(LOG_Q'(((dot + e + rbit * 128) % 256 + 256) % 256), got);
      chk(got == rbit[0], $sformatf("ciphertext response %0d", k));
      wrong += int'(got != rbit[0]);
    end
    $display("100-bit response: %0d clocks = %0.2f ms at 33.3 MHz, %0d wrong bits",
             cyc - c0, real'(cyc - c0) * 30.0e-6, wrong);
    chk(cyc - c0 <= LFSR_W + 1 + NRESP * (N_DIM * (LOG_Q + 1) + 3), "100-bit response time");

    // 100 random b': reference decryption and uniformity
    for (int i = 0; i < SEED_W / 32; i++) sv[i*32 +: 32] = $urandom;
    send_seed(sv);
    ones = 0;
    for (int k = 0; k < NRESP; k++) begin
      int dot, yv;
      logic [LOG_Q-1:0] bv;
      logic got;
      dot = next_dot();
      bv  = LOG_Q'($urandom);
      yv  = ((int'(bv) - dot) % 256 + 256) % 256;
      one_response(bv, got);
      chk(got == ((yv > 64) && (yv <= 192)), $sformatf("random b' response %0d", k));
      ones += int'(got);
    end
    $display("uniformity over %0d responses: %0d %% ones", NRESP, ones);
    chk(ones >= 30 && ones <= 70, "uniformity within 30..70 %");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
