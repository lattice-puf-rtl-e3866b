// puf_counter_tb: random increment pattern on the 128-bit counter, compared
// with a software count; a 4-bit instance checks wrap-around; reset value 0.
module puf_counter_tb;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic inc = 0;
  logic [127:0] t, model;
  logic [3:0]   t4;
  int           n4;

  puf_counter #(.W(128)) dut  (.clk, .rst_n, .inc, .t);
  puf_counter #(.W(4))   dut4 (.clk, .rst_n, .inc, .t(t4));

  always #5 clk = ~clk;

  initial begin
    repeat (2) @(negedge clk);
    checks++;
    if (t !== '0 || t4 !== '0) begin failures++; $display("FAIL reset value"); end
    rst_n = 1;
    model = '0;
    n4 = 0;
    for (int k = 0; k < 300; k++) begin
      inc = $urandom % 2;
      @(negedge clk);
      if (inc) begin model = model + 1; n4 = (n4 + 1) % 16; end
      checks++;
      if (t !== model || t4 !== 4'(n4)) begin
        failures++;
        $display("FAIL cycle %0d t=%0d exp %0d t4=%0d exp %0d", k, t, model, t4, n4);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
