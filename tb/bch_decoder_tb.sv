// bch_decoder_tb: builds codewords of the shortened BCH code with the
// reference encoder of bch_ref_pkg, adds 0 .. T random bit errors and checks
// that the decoder returns the codeword without fail, with latency
// 2N + 2T + 2 clocks. Words with T+1 .. T+3 errors must not come back as the
// sent codeword; how many are flagged by fail is reported. Two instances:
// the [218, 128, t = 11] default and a small [30, 14, t = 2] code.
module bch_decoder_tb;
  import bch_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;

  localparam int N1 = 218, T1 = 11;
  localparam int N2 = 30,  T2 = 2;

  logic            start1 = 0, busy1, done1, fail1;
  logic [N1-1:0]   win1 = '0, wout1;
  logic            start2 = 0, busy2, done2, fail2;
  logic [N2-1:0]   win2 = '0, wout2;

  bch_decoder #(.N(N1), .T(T1)) dut1 (.clk, .rst_n, .start(start1), .word_in(win1),
                                      .busy(busy1), .done(done1), .fail(fail1), .word_out(wout1));
  bch_decoder #(.N(N2), .T(T2)) dut2 (.clk, .rst_n, .start(start2), .word_in(win2),
                                      .busy(busy2), .done(done2), .fail(fail2), .word_out(wout2));

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", msg);
    end
  endtask

  function automatic logic [MAXP-1:0] add_errors(input logic [MAXP-1:0] w, input int n, input int ne);
    bit used [MAXP];
    for (int i = 0; i < MAXP; i++) used[i] = 0;
    for (int k = 0; k < ne; k++) begin
      int p;
      do p = $urandom % n; while (used[p]);
      used[p] = 1;
      w[p] = ~w[p];
    end
    return w;
  endfunction

  int detected = 0, beyond = 0;

  initial begin
    logic [MAXP-1:0] g1, g2, msg, cw, rx;
    int d1, d2, lat;
    bit ok1, ok2;
    g1 = gen_poly(T1, d1, ok1);
    g2 = gen_poly(T2, d2, ok2);
    chk(ok1 && d1 == 84, "t=11 generator polynomial binary, degree 84");
    chk(ok2 && d2 == 16, "t=2 generator polynomial binary, degree 16");
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 60; trial++) begin
      int ne;
      msg = '0;
      for (int i = 0; i < (N1 - d1) / 32 + 1; i++) msg[i*32 +: 32] = $urandom;
      msg &= (MAXP'(1) << (N1 - d1)) - 1;
      cw = encode(msg, N1 - d1, g1, d1);
      ne = trial % (T1 + 4);
      rx = add_errors(cw, N1, ne);
      win1 = rx[N1-1:0];
      start1 = 1;
      @(negedge clk);
      start1 = 0;
      lat = 1;
      while (!done1) begin @(negedge clk); lat++; end
      if (ne <= T1) begin
        chk(wout1 == cw[N1-1:0] && !fail1, $sformatf("t=11 corrects %0d errors", ne));
        chk(lat == 2 * N1 + 2 * T1 + 2, $sformatf("latency %0d", lat));
      end else begin
        beyond++;
        if (fail1) detected++;
        chk(!(wout1 == cw[N1-1:0] && !fail1), "more than T errors not reported as corrected");
      end
      @(negedge clk);
    end
    for (int trial = 0; trial < 30; trial++) begin
      int ne;
      msg = MAXP'($urandom) & ((MAXP'(1) << (N2 - d2)) - 1);
      cw = encode(msg, N2 - d2, g2, d2);
      ne = trial % (T2 + 1);
      rx = add_errors(cw, N2, ne);
      win2 = rx[N2-1:0];
      start2 = 1;
      @(negedge clk);
      start2 = 0;
      while (!done2) @(negedge clk);
      chk(wout2 == cw[N2-1:0] && !fail2, $sformatf("t=2 corrects %0d errors", ne));
      @(negedge clk);
    end
    $display("more than T errors: %0d of %0d words flagged by fail", detected, beyond);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
