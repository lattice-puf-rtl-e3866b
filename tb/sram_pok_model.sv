// sram_pok_model: behavioural model (not synthesizable logic) of the raw
// SRAM cells that serve as the physically obfuscated key.
//
// Each cell has a nominal power-up value fixed at "manufacture" (random per
// instance). A power-up draws a fresh snapshot in which every cell differs
// from its nominal value with probability ber_permille / 1000 (homogeneous
// error model: every cell has the same bit error rate). The fuzzy extractor
// reads the snapshot through a combinational symbol-wide port: sym_addr
// selects REP consecutive cells. Testbenches may also flip single cells of
// the snapshot (flip_cell) to place errors exactly.
module sram_pok_model #(
  parameter int unsigned CELLS = 6540,
  parameter int unsigned REP   = 3,
  parameter int unsigned AW    = 12
) (
  input  logic [AW-1:0]  sym_addr,
  output logic [REP-1:0] raw_bits
);
  logic nominal  [CELLS];
  logic snapshot [CELLS];
  int   last_flips;

  task automatic manufacture();
    for (int i = 0; i < CELLS; i++) nominal[i] = 1'($urandom);
  endtask

  task automatic power_up(input int ber_permille);
    last_flips = 0;
    for (int i = 0; i < CELLS; i++) begin
      logic e;
      e = (($urandom % 1000) < ber_permille);
      snapshot[i] = nominal[i] ^ e;
      last_flips += int'(e);
    end
  endtask

  task automatic flip_cell(input int idx);
    snapshot[idx] = ~snapshot[idx];
  endtask

  always_comb
    for (int k = 0; k < REP; k++) begin
      int idx;
      idx = int'(sym_addr) * REP + k;
      raw_bits[k] = (idx < CELLS) ? snapshot[idx] : 1'b0;
    end
endmodule
