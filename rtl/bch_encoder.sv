// bch_encoder -- systematic binary BCH encoder, fully parallel.
//
// Produces the R = n - k parity bits of a t-error-correcting binary BCH code
// over GF(2^MD) for a K-bit message:  parity(x) = msg(x) * x^R mod g(x).
// The codeword is {msg, parity}: bit i of the concatenation is the
// coefficient of x^i, so the message occupies positions R .. R+K-1. With
// the default MD = 6, T = 3, K = 45 this is the BCH(63,45) code; K below
// 2^MD - 1 - R gives a shortened code.
//
// Implementation: the bit-serial LFSR division by g(x) is unrolled over all
// K message bits inside one always_comb, which synthesis reduces to an XOR
// network (one XOR tree per parity bit). g(x) is computed at elaboration by
// gf_pkg::bch_gen_poly. The paper gives the encoder only as a block; the
// parallel form is this design's choice. In the fault-tolerant multiplier the
// same encoder also re-encodes the received message for the syndrome stage.
//
// Timing: purely combinational.
module bch_encoder
  import gf_pkg::*;
#(
  parameter int MD = 6,
  parameter int T  = 3,
  parameter int K  = 45,
  localparam int R = bch_parity_bits(MD, T)
) (
  input  logic [K-1:0] msg,
  output logic [R-1:0] parity
);

  localparam gpoly_t G = bch_gen_poly(MD, T);

  always_comb begin
    logic [R-1:0] rem;
    logic         fb;
    rem = '0;
    for (int i = K - 1; i >= 0; i--) begin
      fb  = msg[i] ^ rem[R-1];
      rem = {rem[R-2:0], 1'b0};
      if (fb) rem = rem ^ G[R-1:0];
    end
    parity = rem;
  end

endmodule
