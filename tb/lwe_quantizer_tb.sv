// lwe_quantizer_tb: exhaustive check of the response quantizer for q = 256
// and for a reduced q = 16, against the interval definition
// r = 1 iff q/4 < y <= 3q/4.
module lwe_quantizer_tb;
  int checks = 0, failures = 0;
  logic [7:0] y8;
  logic       r8;
  logic [3:0] y4;
  logic       r4;

  lwe_quantizer #(.LOG_Q(8)) dut8 (.y(y8), .r(r8));
  lwe_quantizer #(.LOG_Q(4)) dut4 (.y(y4), .r(r4));

  initial begin
    for (int v = 0; v < 256; v++) begin
      y8 = 8'(v);
      #1;
      checks++;
      if (r8 !== ((v > 64) && (v <= 192))) begin
        failures++;
        $display("FAIL q=256 y=%0d r=%0d", v, r8);
      end
    end
    for (int v = 0; v < 16; v++) begin
      y4 = 4'(v);
      #1;
      checks++;
      if (r4 !== ((v > 4) && (v <= 12))) begin
        failures++;
        $display("FAIL q=16 y=%0d r=%0d", v, r4);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
