// puf_lfsr: the pseudo-random generator that expands the challenge seed.
//
// A W-bit Fibonacci LFSR that moves one bit per clock, as a shift-register
// (SRL/RAM based) implementation does. In load mode the seed is shifted in
// serially, most significant bit first, so that after W load clocks the
// state equals the seed word (seed_a' || t). In step mode the XOR of the tap
// bits is shifted in; that same bit is presented on out_bit during the step
// and is the next bit of the challenge stream c_0, c_1, ... from which the
// vector a' is formed (a'_i = sum_j c_{8(i-1)+j} 2^j).
//
// Length 256 follows the design; the tap set (package LFSR_TAPS) is this
// implementation's choice since none is published. load has priority over
// step. Like a RAM-based shift register the state has no reset: the
// controller always loads a seed before the first step, so the power-up
// contents are never used. The feedback polynomial is primitive, so any
// non-zero seed gives a sequence of period 2^256 - 1.
module puf_lfsr #(
  parameter int unsigned   W    = 256,
  parameter logic [W-1:0]  TAPS = lattice_puf_pkg::LFSR_TAPS
) (
  input  logic         clk,
  input  logic         load,
  input  logic         seed_bit,
  input  logic         step,
  output logic         out_bit,
  output logic [W-1:0] state
);
  always_comb out_bit = ^(state & TAPS);

  always_ff @(posedge clk) begin
    if (load)      state <= {state[W-2:0], seed_bit};
    else if (step) state <= {state[W-2:0], out_bit};
  end
endmodule
