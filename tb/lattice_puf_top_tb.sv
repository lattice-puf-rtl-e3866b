// lattice_puf_top_tb: end-to-end test of the whole lattice PUF at its
// default sizes (n = 160, q = 256, 256-bit LFSR, 128-bit counter, 1280-bit
// key from 6,540 modelled SRAM cells).
//
// Acting as manufacturer and verifier, the testbench enrolls a random key
// (helper data from the reference BCH encoder), powers the SRAM model up with
// 5 % raw bit errors, lets the PUF rebuild its key, and then runs several
// challenge sessions. For each response it regenerates a' with its own LFSR
// model from seed || t and either
//  - encrypts a random bit r as b' = <a',s> + e + r*q/2 (|e| <= 40), the
//    verifier's way of making a CRP, and expects r back, or
//  - sends a random b' and expects Q(b' - <a',s>).
// It checks the response latency (1441 clocks) and seed load time
// (257 clocks), and counts each mechanism: challenge refused before the
// key exists, key rebuilt through corrected cell errors, seed load, counter
// increment, several responses from one seed, the same seed giving a new a'
// because t moved on, a new seed replacing a running session, and an
// unusable power-up reported by key_fail. A mechanism never seen is a failure.
module lattice_puf_top_tb;
  import lattice_puf_pkg::*;
  import bch_ref_pkg::*;
  localparam int AW = $clog2(FE_BLOCKS * BCH_N);

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

  lattice_puf_top dut (.*);
  sram_pok_model #(.CELLS(RAW_BITS), .REP(REP), .AW(AW)) sram (.sym_addr, .raw_bits);

  always_comb
    for (int k = 0; k < REP; k++) begin
      int idx;
      idx = int'(sym_addr) * REP + k;
      helper_bits[k] = (idx < RAW_BITS) ? helper[idx] : 1'b0;
    end

  always #5 clk = ~clk;

  // mechanism counters
  int m_refused = 0, m_key_ok = 0, m_cells_corrected = 0, m_seed_load = 0;
  int m_cnt_inc = 0, m_multi = 0, m_new_a_same_seed = 0, m_preempt = 0;
  int m_key_fail = 0, m_cipher_ok = 0, m_random_b = 0;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", msg);
    end
  endtask

  // ---- reference models ----
  logic [LFSR_W-1:0] ref_lfsr;

  function automatic logic ref_step();
    logic fb;
    fb = ref_lfsr[255] ^ ref_lfsr[253] ^ ref_lfsr[250] ^ ref_lfsr[245];
    ref_lfsr = {ref_lfsr[LFSR_W-2:0], fb};
    return fb;
  endfunction

  // next a' from the stream; returns <a',s> mod q
  int a_vec [N_DIM];
  function automatic int next_dot();
    int dot;
    dot = 0;
    for (int i = 0; i < N_DIM; i++) begin
      int a;
      a = 0;
      for (int j = 0; j < LOG_Q; j++) a |= int'(ref_step()) << j;
      a_vec[i] = a;
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

  task automatic rebuild_key();
    key_start = 1;
    @(negedge clk);
    key_start = 0;
    while (!key_valid) @(negedge clk);
  endtask

  task automatic send_seed(input logic [SEED_W-1:0] sv);
    logic [CNT_W-1:0] t_before;
    int clocks;
    t_before = t;
    seed = sv; seed_valid = 1;
    @(posedge clk);
    while (!seed_ready) @(posedge clk);
    @(negedge clk);
    seed_valid = 0;
    ref_lfsr = {sv, t_before};
    chk(t == t_before + 1, "counter incremented by the seed");
    if (t == t_before + 1) m_cnt_inc++;
    clocks = 1;
    while (!b_ready) begin @(negedge clk); clocks++; end
    chk(clocks == LFSR_W + 1, $sformatf("seed load time %0d", clocks));
    m_seed_load++;
  endtask

  task automatic get_response(input bit encrypt, output int a0);
    int dot, e, rb, yv, clocks;
    logic exp_r;
    dot = next_dot();
    a0  = a_vec[0];
    if (encrypt) begin
      e  = int'($urandom % 81) - 40;
      rb = $urandom % 2;
      b  = LOG_Q'(((dot + e + rb * 128) % 256 + 256) % 256);
      exp_r = rb[0];
    end else begin
      b  = LOG_Q'($urandom);
      yv = ((int'(b) - dot) % 256 + 256) % 256;
      exp_r = (yv > 64) && (yv <= 192);
    end
    b_valid = 1;
    @(posedge clk);
    while (!b_ready) @(posedge clk);
    @(negedge clk);
    b_valid = 0;
    clocks = 1;
    while (!r_valid) begin @(negedge clk); clocks++; end
    chk(clocks == N_DIM * (LOG_Q + 1) + 1, $sformatf("response latency %0d", clocks));
    chk(r == exp_r, $sformatf("response bit (%s)", encrypt ? "ciphertext" : "random b'"));
    if (r == exp_r) begin
      if (encrypt) m_cipher_ok++;
      else m_random_b++;
    end
    @(negedge clk);
  endtask

  initial begin
    logic [SEED_W-1:0] s0, s1;
    int a0_first, a0, a0_again;
    repeat (2) @(negedge clk);
    rst_n = 1;
    enroll();
    sram.power_up(50);
    // a challenge before the key exists is not taken
    seed_valid = 1;
    repeat (20) @(negedge clk);
    chk(!seed_ready, "seed refused before key reconstruction");
    if (!seed_ready) m_refused++;
    seed_valid = 0;
    rebuild_key();
    chk(!key_fail, "key rebuilt without failure");
    if (!key_fail) m_key_ok++;
    if (sram.last_flips > 0) m_cells_corrected++;
    $display("power-up with %0d of %0d cells flipped", sram.last_flips, RAW_BITS);

    // session 1: one seed, six responses
    for (int i = 0; i < SEED_W / 32; i++) s0[i*32 +: 32] = $urandom;
    send_seed(s0);
    for (int k = 0; k < 6; k++) begin
      get_response(k % 2 == 0, a0);
      if (k == 0) a0_first = a0;
    end
    m_multi++;
    // session 2: a different seed replaces the running one
    for (int i = 0; i < SEED_W / 32; i++) s1[i*32 +: 32] = $urandom;
    send_seed(s1);
    m_preempt++;
    for (int k = 0; k < 3; k++) get_response(k != 1, a0);
    // session 3: the first seed again; t has moved on, so a' is new
    send_seed(s0);
    get_response(1, a0_again);
    for (int k = 0; k < 2; k++) get_response(0, a0);
    chk(t == CNT_W'(3), "three sessions counted");
    begin
      // compare the whole first a' of sessions 1 and 3
      int diff;
      logic [LFSR_W-1:0] keep;
      int v1 [N_DIM];
      keep = ref_lfsr;
      ref_lfsr = {s0, CNT_W'(0)};
      void'(next_dot());
      v1 = a_vec;
      ref_lfsr = {s0, CNT_W'(2)};
      void'(next_dot());
      diff = 0;
      for (int i = 0; i < N_DIM; i++) diff += int'(v1[i] != a_vec[i]);
      chk(diff > 0 && a0_first == v1[0] && a0_again == a_vec[0], "same seed, new counter, new a'");
      if (diff > 0) m_new_a_same_seed++;
      ref_lfsr = keep;
    end
    // a bad power-up is reported
    sram.power_up(300);
    rebuild_key();
    chk(key_fail, "30% BER power-up flagged by key_fail");
    if (key_fail) m_key_fail++;

    $display("mechanisms: refused=%0d key_ok=%0d cells_corrected=%0d seed_loads=%0d counter_incs=%0d",
             m_refused, m_key_ok, m_cells_corrected, m_seed_load, m_cnt_inc);
    $display("            multi_response=%0d preempt=%0d new_a_same_seed=%0d key_fail=%0d ciphertexts=%0d random_b=%0d",
             m_multi, m_preempt, m_new_a_same_seed, m_key_fail, m_cipher_ok, m_random_b);
    chk(m_refused > 0 && m_key_ok > 0 && m_cells_corrected > 0 && m_seed_load > 0 &&
        m_cnt_inc > 0 && m_multi > 0 && m_preempt > 0 && m_new_a_same_seed > 0 &&
        m_key_fail > 0 && m_cipher_ok > 0 && m_random_b > 0, "every mechanism exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
