// puf_controller: sequencer of the lattice PUF datapath.
//
// Session flow (one challenge seed, then any number of b' values):
//   IDLE  - once the key is valid, accepts seed_a' (seed_valid & seed_ready).
//           It captures seed_a' || t, pulses cnt_inc so the next session uses
//           t+1, and goes to LOAD.
//   LOAD  - LFSR_W clocks: shifts the captured word into the LFSR, MSB first.
//   READY - accepts b' (b_valid & b_ready): pulses mac_init (y <= b'),
//           clears the element index. A new seed may be accepted here too;
//           a seed offered together with b' wins.
//   GEN   - LOG_Q clocks: steps the LFSR, collecting its output bits into
//           a_i, first bit in the least significant position.
//   MAC   - one clock: mac_en with a_i and elem_idx (selects s_i); after the
//           N_DIM-th element goes to DONE, otherwise back to GEN.
//   DONE  - r_valid for one clock, then READY. The LFSR keeps its state, so
//           the next b' is decrypted against the next a' of the stream.
// Timing: seed load takes LFSR_W + 1 clocks from acceptance; a response
// takes N_DIM * (LOG_Q + 1) + 1 clocks from acceptance of b' to r_valid
// (1441 clocks, 43.3 us at 33.3 MHz, against 8 us and 44 us published).
// The published design names this block but gives neither its states nor its
// handshakes; everything here is this implementation's choice, sized so the
// bit-serial LFSR sets the pace as in the published latency table.
module puf_controller
  import lattice_puf_pkg::*;
#(
  parameter int unsigned N      = N_DIM,
  parameter int unsigned LQ     = LOG_Q,
  parameter int unsigned LW     = LFSR_W,
  parameter int unsigned CW     = CNT_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              key_valid,
  // challenge seed
  input  logic              seed_valid,
  output logic              seed_ready,
  input  logic [LW-CW-1:0]  seed,
  // counter
  input  logic [CW-1:0]     t,
  output logic              cnt_inc,
  // b' of each response
  input  logic              b_valid,
  output logic              b_ready,
  // LFSR
  output logic              lfsr_load,
  output logic              lfsr_seed_bit,
  output logic              lfsr_step,
  input  logic              lfsr_bit,
  // LWE decryption datapath
  output logic              mac_init,
  output logic              mac_en,
  output logic [LQ-1:0]     a_i,
  output logic [$clog2(N)-1:0] elem_idx,
  output logic              r_valid,
  output ctrl_state_e       state
);
  logic [LW-1:0]         seed_word;
  logic [$clog2(LW)-1:0] bit_cnt;
  logic                  take_seed, take_b;

  always_comb begin
    seed_ready    = key_valid && (state == C_IDLE || state == C_READY);
    b_ready       = (state == C_READY) && !seed_valid;
    take_seed     = seed_valid && seed_ready;
    take_b        = b_valid && b_ready;
    cnt_inc       = take_seed;
    lfsr_load     = (state == C_LOAD);
    lfsr_seed_bit = seed_word[LW-1];
    lfsr_step     = (state == C_GEN);
    mac_init      = take_b;
    mac_en        = (state == C_MAC);
    r_valid       = (state == C_DONE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= C_IDLE;
      seed_word <= '0;
      bit_cnt   <= '0;
      a_i       <= '0;
      elem_idx  <= '0;
    end else begin
      unique case (state)
        C_IDLE, C_READY: begin
          if (take_seed) begin
            seed_word <= {seed, t};
            bit_cnt   <= '0;
            state     <= C_LOAD;
          end else if (take_b) begin
            elem_idx <= '0;
            bit_cnt  <= '0;
            state    <= C_GEN;
          end
        end
        C_LOAD: begin
          seed_word <= {seed_word[LW-2:0], 1'b0};
          bit_cnt   <= bit_cnt + 1'b1;
          if (bit_cnt == $clog2(LW)'(LW - 1)) state <= C_READY;
        end
        C_GEN: begin
          a_i     <= {lfsr_bit, a_i[LQ-1:1]};
          bit_cnt <= bit_cnt + 1'b1;
          if (bit_cnt == $clog2(LW)'(LQ - 1)) state <= C_MAC;
        end
        C_MAC: begin
          bit_cnt <= '0;
          if (elem_idx == $clog2(N)'(N - 1)) begin
            state <= C_DONE;
          end else begin
            elem_idx <= elem_idx + 1'b1;
            state    <= C_GEN;
          end
        end
        C_DONE:  state <= C_READY;
        default: state <= C_IDLE;
      endcase
    end
  end

  // the LFSR must never be stepped while it is being loaded
  assert property (@(posedge clk) disable iff (!rst_n) !(lfsr_load && lfsr_step));
  // a new challenge is only taken with a reconstructed key
  assert property (@(posedge clk) disable iff (!rst_n) take_seed |-> key_valid);
endmodule
