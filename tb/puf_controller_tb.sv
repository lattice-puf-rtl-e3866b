// puf_controller_tb: runs the controller with a random bit stream standing in
// for the LFSR output. A monitor checks, clock by clock, that
//  - no challenge is taken before key_valid,
//  - a seed acceptance pulses cnt_inc once and shifts exactly {seed, t},
//    MSB first, into the LFSR in 256 load clocks (ready again 257 clocks
//    after acceptance),
//  - each response performs 160 MAC stages, each with elem_idx = stage and
//    a_i = the last 8 LFSR output bits, first bit least significant,
//  - r_valid comes 1441 clocks after b' is accepted,
//  - load and step are never active together,
//  - a second b' continues the LFSR stream and a new seed reloads it.
module puf_controller_tb;
  import lattice_puf_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic key_valid = 0, seed_valid = 0, b_valid = 0, lfsr_bit = 0;
  logic [SEED_W-1:0] seed = '0;
  logic [CNT_W-1:0]  t = '0;
  logic seed_ready, cnt_inc, b_ready, lfsr_load, lfsr_seed_bit, lfsr_step;
  logic mac_init, mac_en, r_valid;
  logic [LOG_Q-1:0] a_i;
  logic [$clog2(N_DIM)-1:0] elem_idx;
  ctrl_state_e state;

  puf_controller dut (.*);

  always #5 clk = ~clk;

  longint cyc = 0;
  longint t_seed_acc, t_b_acc, t_rvalid;
  logic [LFSR_W-1:0] loaded;
  int n_load = 0, n_mac = 0, n_inc = 0, n_rvalid = 0;
  logic stream [$];

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s (cycle %0d)", msg, cyc);
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (seed_valid && seed_ready) begin t_seed_acc = cyc; n_load = 0; end
    if (cnt_inc) n_inc++;
    if (b_valid && b_ready) begin
      t_b_acc = cyc; n_mac = 0; stream.delete();
      chk(mac_init, "mac_init with b' acceptance");
    end
    if (lfsr_load) begin loaded = {loaded[LFSR_W-2:0], lfsr_seed_bit}; n_load++; end
    if (lfsr_step) stream.push_back(lfsr_bit);
    if (lfsr_load && lfsr_step) chk(0, "load and step together");
    if (mac_en) begin
      logic [LOG_Q-1:0] exp_a;
      for (int j = 0; j < LOG_Q; j++) exp_a[j] = stream[n_mac * LOG_Q + j];
      chk(stream.size() == (n_mac + 1) * LOG_Q, "LOG_Q LFSR steps per stage");
      chk(a_i == exp_a, "a_i assembled LSB first");
      chk(int'(elem_idx) == n_mac, "elem_idx");
      n_mac++;
    end
    if (r_valid) begin t_rvalid = cyc; n_rvalid++; end
  end

  always @(negedge clk) lfsr_bit = 1'($urandom);

  task automatic give_seed(input logic [SEED_W-1:0] sv);
    seed = sv; seed_valid = 1;
    do @(posedge clk); while (!seed_ready);
    @(negedge clk);
    seed_valid = 0;
    t = t + 1;               // stands in for the counter the top wires up
    wait (b_ready);
    @(negedge clk);
  endtask

  task automatic give_b();
    b_valid = 1;
    do @(posedge clk); while (!b_ready);
    @(negedge clk);
    b_valid = 0;
    wait (r_valid);
    @(posedge clk);        // let the monitor see the r_valid clock
    @(negedge clk);
  endtask

  initial begin
    logic [SEED_W-1:0] sv;
    logic [CNT_W-1:0]  tv;
    int inc0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // no key: the seed must be refused
    seed_valid = 1;
    repeat (5) @(negedge clk);
    chk(!seed_ready && state == C_IDLE, "seed refused without key");
    seed_valid = 0;
    key_valid = 1;
    for (int s = 0; s < 2; s++) begin
      for (int i = 0; i < SEED_W / 32; i++) sv[i*32 +: 32] = $urandom;
      tv = t;
      inc0 = n_inc;
      give_seed(sv);
      chk(n_inc == inc0 + 1, "one counter increment per seed");
      chk(n_load == LFSR_W, "256 load clocks");
      chk(loaded == {sv, tv}, "seed||t shifted in MSB first");
      for (int k = 0; k < 3; k++) begin
        give_b();
        chk(n_mac == N_DIM, "160 MAC stages");
        chk(t_rvalid - t_b_acc == N_DIM * (LOG_Q + 1) + 1, "response latency 1441");
        chk(n_rvalid == s * 3 + k + 1, "one r_valid per response");
      end
    end
    $display("seed load to ready: %0d clocks, response: %0d clocks",
             LFSR_W + 1, t_rvalid - t_b_acc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
