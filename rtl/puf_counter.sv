// puf_counter: the self-incrementing challenge counter t.
//
// Its value is concatenated with the challenger's seed to form the LFSR seed,
// so an attacker can never present the same a' twice with different b'.
// The value is public (exported on t) and grows by one for every response
// generation session, i.e. every accepted challenge seed (inc pulse, one
// clock). The 128-bit width follows the design. Clearing it at reset is this
// design's choice: a deployed device would need t to survive power cycles
// (non-volatile storage), which the design does not describe.
module puf_counter #(
  parameter int unsigned W = 128
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         inc,
  output logic [W-1:0] t
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   t <= '0;
    else if (inc) t <= t + W'(1);
  end
endmodule
