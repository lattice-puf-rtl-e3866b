// rep_decoder: decoder of the inner repetition code of the fuzzy extractor.
//
// In the code-offset construction each outer-code bit is stored REP times in
// raw SRAM cells, masked by public helper data. This block XORs the REP raw
// power-up bits with their REP helper bits, which leaves REP noisy copies of
// the outer-code bit, and takes the majority (REP odd). It corrects up to
// (REP-1)/2 flipped cells per bit: [3,1,1] for the 5 % raw-BER configuration.
// Combinational; the fuzzy extractor feeds one symbol per clock.
module rep_decoder #(
  parameter int unsigned REP = 3
) (
  input  logic [REP-1:0] raw_bits,
  input  logic [REP-1:0] helper_bits,
  output logic           bit_out
);
  logic [REP-1:0]         copies;
  logic [$clog2(REP+1)-1:0] ones;

  always_comb begin
    copies = raw_bits ^ helper_bits;
    ones   = '0;
    for (int i = 0; i < REP; i++) ones += $clog2(REP+1)'(copies[i]);
    bit_out = (ones > $clog2(REP+1)'(REP / 2));
  end
endmodule
