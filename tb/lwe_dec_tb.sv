// lwe_dec_tb: drives the LWE decryption unit through full n = 160 stage
// decryptions with random a', s and b', and with genuine LWE ciphertexts
// b' = <a',s> + e + r*q/2 (|e| < q/4), comparing y and r against a
// software model (integer arithmetic reduced mod 256).
module lwe_dec_tb;
  localparam int N = 160;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic init = 0, mac_en = 0;
  logic [7:0] b = 0, a_i = 0, s_i = 0, y;
  logic r;
  int a [N], s [N];

  lwe_dec #(.LOG_Q(8)) dut (.clk, .rst_n, .init, .b, .mac_en, .a_i, .s_i, .y, .r);

  always #5 clk = ~clk;

  task automatic run(input int bval, output int exp_y);
    int acc;
    @(negedge clk);
    init = 1; b = 8'(bval);
    @(negedge clk);
    init = 0;
    acc = bval;
    for (int i = 0; i < N; i++) begin
      mac_en = 1; a_i = 8'(a[i]); s_i = 8'(s[i]);
      acc = (acc - a[i] * s[i]) % 256;
      if (acc < 0) acc += 256;
      @(negedge clk);
    end
    mac_en = 0;
    exp_y = acc;
  endtask

  initial begin
    int ey, dot, e, rbit, bv;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 40; trial++) begin
      for (int i = 0; i < N; i++) begin
        a[i] = $urandom % 256;
        s[i] = $urandom % 256;
      end
      if (trial % 2 == 0) begin
        bv = $urandom % 256;
        run(bv, ey);
        checks++;
        if (y !== 8'(ey) || r !== ((ey > 64) && (ey <= 192))) begin
          failures++;
          $display("FAIL random trial %0d y=%0d exp %0d r=%0d", trial, y, ey, r);
        end
      end else begin
        dot = 0;
        for (int i = 0; i < N; i++) dot += a[i] * s[i];
        e    = int'($urandom % 101) - 50;
        rbit = $urandom % 2;
        bv   = ((dot + e + rbit * 128) % 256 + 256) % 256;
        run(bv, ey);
        checks++;
        if (r !== rbit[0] || y !== 8'(ey)) begin
          failures++;
          $display("FAIL ciphertext trial %0d r=%0d exp %0d", trial, r, rbit);
        end
      end
    end
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
