// lwe_quantizer: the decision step of LWE decryption.
//
// Maps the accumulated value y = b' - <a',s> (an element of Z_q) to the
// response bit r:  r = 0 for y in [0, q/4] or (3q/4, q-1],
//                  r = 1 for y in (q/4, 3q/4].
// That is, r tells whether y lies nearer q/2 than 0 on the ring. The interval
// bounds are the ones given with the design; with q = 256 r is 1 for
// y = 65 ... 192. Purely combinational.
module lwe_quantizer #(
  parameter int unsigned LOG_Q = 8
) (
  input  logic [LOG_Q-1:0] y,
  output logic             r
);
  localparam logic [LOG_Q-1:0] Q_QUARTER  = LOG_Q'(1) << (LOG_Q - 2);
  localparam logic [LOG_Q-1:0] Q_3QUARTER = LOG_Q'(3) << (LOG_Q - 2);

  always_comb r = (y > Q_QUARTER) && (y <= Q_3QUARTER);
endmodule
