// fuzzy_extractor_tb: enrolls a random 1280-bit key on a modelled SRAM
// array (helper = nominal cells XOR Rep3(BCH(key block))), then checks
// key reconstruction:
//  - error-free power-up and 5 % raw BER power-ups give the enrolled key,
//  - 11 decoding errors placed in one outer block (2 of 3 cells flipped in
//    11 symbols) are still corrected; 12 such errors set key_fail,
//  - a 30 % raw BER power-up is reported through key_fail.
module fuzzy_extractor_tb;
  import lattice_puf_pkg::*;
  import bch_ref_pkg::*;
  localparam int AW = $clog2(FE_BLOCKS * BCH_N);
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0;
  logic [AW-1:0] sym_addr;
  logic [REP-1:0] raw_bits, helper_bits;
  logic [KEY_W-1:0] key, key_exp;
  logic key_valid, key_fail;
  logic helper [RAW_BITS];

  fuzzy_extractor dut (.clk, .rst_n, .start, .sym_addr, .raw_bits, .helper_bits,
                       .key, .key_valid, .key_fail);
  sram_pok_model #(.CELLS(RAW_BITS), .REP(REP), .AW(AW)) sram (.sym_addr, .raw_bits);

  always_comb
    for (int k = 0; k < REP; k++) begin
      int idx;
      idx = int'(sym_addr) * REP + k;
      helper_bits[k] = (idx < RAW_BITS) ? helper[idx] : 1'b0;
    end

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", msg);
    end
  endtask

  task automatic enroll();
    logic [MAXP-1:0] g, msg, cw;
    int deg;
    bit ok;
    g = gen_poly(BCH_T, deg, ok);
    for (int i = 0; i < KEY_W / 32; i++) key_exp[i*32 +: 32] = $urandom;
    sram.manufacture();
    for (int b = 0; b < FE_BLOCKS; b++) begin
      // message = key block followed by zeros in the unused message bits
      msg = MAXP'(key_exp[b*BCH_K +: BCH_K]) << (BCH_N - deg - BCH_K);
      cw  = encode(msg, BCH_N - deg, g, deg);
      for (int j = 0; j < BCH_N; j++)
        for (int k = 0; k < REP; k++)
          helper[(b*BCH_N + j)*REP + k] = sram.nominal[(b*BCH_N + j)*REP + k] ^ cw[j];
    end
  endtask

  task automatic reconstruct(output int clocks);
    start = 1;
    @(negedge clk);
    start = 0;
    clocks = 1;
    while (!key_valid) begin @(negedge clk); clocks++; end
  endtask

  initial begin
    int clocks;
    repeat (2) @(negedge clk);
    rst_n = 1;
    enroll();
    sram.power_up(0);
    reconstruct(clocks);
    chk(key == key_exp && !key_fail, "error-free power-up");
    $display("key reconstruction: %0d clocks", clocks);
    chk(clocks < 7100, "reconstruction time");
    for (int p = 0; p < 4; p++) begin
      sram.power_up(50);
      reconstruct(clocks);
      chk(key == key_exp && !key_fail, $sformatf("5%% BER power-up %0d (%0d cells flipped)", p, sram.last_flips));
    end
    // 11 wrong symbols in block 3: corrected
    sram.power_up(0);
    for (int j = 0; j < 11; j++) begin
      sram.flip_cell((3*BCH_N + 7 + 19*j)*REP + 0);
      sram.flip_cell((3*BCH_N + 7 + 19*j)*REP + 2);
    end
    reconstruct(clocks);
    chk(key == key_exp && !key_fail, "11 symbol errors in one block corrected");
    // 12 wrong symbols in block 5: beyond the outer code
    sram.power_up(0);
    for (int j = 0; j < 12; j++) begin
      sram.flip_cell((5*BCH_N + 3 + 17*j)*REP + 0);
      sram.flip_cell((5*BCH_N + 3 + 17*j)*REP + 1);
    end
    reconstruct(clocks);
    chk(key_fail, "12 symbol errors in one block flagged");
    chk(key[4*BCH_K +: BCH_K] == key_exp[4*BCH_K +: BCH_K], "other blocks unaffected");
    sram.power_up(300);
    reconstruct(clocks);
    chk(key_fail, "30% BER power-up flagged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
