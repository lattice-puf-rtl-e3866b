// rep_decoder_tb: exhaustive check of the majority decoder for REP = 3 and
// REP = 5 over all raw/helper combinations.
module rep_decoder_tb;
  int checks = 0, failures = 0;
  logic [2:0] raw3, hlp3;
  logic [4:0] raw5, hlp5;
  logic o3, o5;

  rep_decoder #(.REP(3)) dut3 (.raw_bits(raw3), .helper_bits(hlp3), .bit_out(o3));
  rep_decoder #(.REP(5)) dut5 (.raw_bits(raw5), .helper_bits(hlp5), .bit_out(o5));

  initial begin
    for (int r = 0; r < 8; r++) for (int h = 0; h < 8; h++) begin
      int ones;
      raw3 = 3'(r); hlp3 = 3'(h);
      #1;
      ones = $countones(3'(r ^ h));
      checks++;
      if (o3 !== (ones >= 2)) begin failures++; $display("FAIL rep3 %0d %0d", r, h); end
    end
    for (int r = 0; r < 32; r++) for (int h = 0; h < 32; h++) begin
      int ones;
      raw5 = 5'(r); hlp5 = 5'(h);
      #1;
      ones = $countones(5'(r ^ h));
      checks++;
      if (o5 !== (ones >= 3)) begin failures++; $display("FAIL rep5 %0d %0d", r, h); end
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
