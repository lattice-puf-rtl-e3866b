// fe_configs_tb: the four error-correcting-code configurations of the key
// reconstruction, each at its own raw SRAM bit error rate:
//   1 %:  no inner code  x BCH [236,128,14]   (2,360 cells)
//   5 %:  repetition 3   x BCH [218,128,11]   (6,540 cells, the default)
//   10 %: repetition 5   x BCH [220,128,12]   (11,000 cells)
//   15 %: repetition 7   x BCH [244,128,15]   (17,080 cells)
// Each must return the enrolled 1280-bit key on every power-up.
module fe_configs_tb;
  logic clk = 0, rst_n = 0;
  logic d1, d5, d10, d15;
  int c1, c5, c10, c15, f1, f5, f10, f15;

  fe_config_check #(.R(1), .N(236), .T(14), .BER_PERMILLE(10))  cfg1  (.clk, .rst_n, .done(d1),  .checks(c1),  .failures(f1));
  fe_config_check #(.R(3), .N(218), .T(11), .BER_PERMILLE(50))  cfg5  (.clk, .rst_n, .done(d5),  .checks(c5),  .failures(f5));
  fe_config_check #(.R(5), .N(220), .T(12), .BER_PERMILLE(100)) cfg10 (.clk, .rst_n, .done(d10), .checks(c10), .failures(f10));
  fe_config_check #(.R(7), .N(244), .T(15), .BER_PERMILLE(150)) cfg15 (.clk, .rst_n, .done(d15), .checks(c15), .failures(f15));

  always #5 clk = ~clk;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (d1 && d5 && d10 && d15);
    $display("TB_RESULT checks=%0d failures=%0d", c1 + c5 + c10 + c15, f1 + f5 + f10 + f15);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c1 + c5 + c10 + c15, f1 + f5 + f10 + f15 + 1);
    $finish;
  end
endmodule
