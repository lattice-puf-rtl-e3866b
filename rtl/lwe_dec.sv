// lwe_dec: LWE decryption function (the PUF core).
//
// Computes r = Q(b' - <a', s>) mod q with one multiply-accumulate stage per
// clock enable, the serial n-stage form the design describes: the register
// y is loaded with b' (y0 = b), then each enabled clock subtracts the
// product a'_i * s_i. q is a power of two, so modulo arithmetic is ordinary
// log q-bit arithmetic whose carries are dropped. The quantizer turns the
// final y into the response bit.
//
// Interface: init loads y <= b (takes priority over mac_en); mac_en
// performs y <= y - a_i * s_i. r and y are combinational/registered outputs
// of the current accumulator, valid once the controller has issued all n
// stages. The caller supplies a_i and s_i in the same cycle as mac_en.
// The published block diagram draws the accumulator as an adder; the text
// defines the value as b - <a,s>, so the product is subtracted here.
module lwe_dec #(
  parameter int unsigned LOG_Q = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             init,
  input  logic [LOG_Q-1:0] b,
  input  logic             mac_en,
  input  logic [LOG_Q-1:0] a_i,
  input  logic [LOG_Q-1:0] s_i,
  output logic [LOG_Q-1:0] y,
  output logic             r
);
  logic [LOG_Q-1:0] prod;   // only the low log q bits matter mod q

  always_comb prod = LOG_Q'(a_i * s_i);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      y <= '0;
    else if (init)   y <= b;
    else if (mac_en) y <= y - prod;
  end

  lwe_quantizer #(.LOG_Q(LOG_Q)) u_quant (.y(y), .r(r));
endmodule
