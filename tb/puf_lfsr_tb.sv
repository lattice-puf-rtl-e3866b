// puf_lfsr_tb: loads random 256-bit seeds serially (MSB first), checks the
// state equals the seed after 256 load clocks, then steps the LFSR and
// compares every output bit and the state with a software Fibonacci LFSR
// with feedback s[255]^s[253]^s[250]^s[245].
module puf_lfsr_tb;
  localparam int W = 256;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic load = 0, seed_bit = 0, step = 0, out_bit;
  logic [W-1:0] state, model, seedv;

  puf_lfsr #(.W(W)) dut (.clk, .load, .seed_bit, .step, .out_bit, .state);

  always #5 clk = ~clk;

  initial begin
    logic fb;
    repeat (2) @(negedge clk);
    for (int trial = 0; trial < 4; trial++) begin
      for (int i = 0; i < W / 32; i++) seedv[i*32 +: 32] = $urandom;
      for (int i = W - 1; i >= 0; i--) begin
        load = 1; seed_bit = seedv[i];
        @(negedge clk);
      end
      load = 0;
      checks++;
      if (state !== seedv) begin
        failures++;
        $display("FAIL seed load trial %0d", trial);
      end
      model = seedv;
      // idle clocks must not move the state
      repeat (3) @(negedge clk);
      checks++;
      if (state !== model) begin failures++; $display("FAIL state moved while idle"); end
      for (int k = 0; k < 600; k++) begin
        fb = model[255] ^ model[253] ^ model[250] ^ model[245];
        step = 1;
        #1;
        checks++;
        if (out_bit !== fb) begin
          failures++;
          if (failures < 10) $display("FAIL step %0d out_bit=%0d exp %0d", k, out_bit, fb);
        end
        @(negedge clk);
        model = {model[W-2:0], fb};
      end
      step = 0;
      checks++;
      if (state !== model) begin failures++; $display("FAIL state after stepping"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
