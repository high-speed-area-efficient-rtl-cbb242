// ft_multiplier_top -- fault-tolerant GF(2^M) multiplier protected by a
// binary BCH code.
//
// Data flow: the sequential polynomial-basis multiplier computes
// C = A * B mod f. Its product is treated as a K = M bit message and
// BCH-encoded into an N-bit codeword, which leaves the block on code_out.
// Whatever disturbs the result between encoder and decoder (the "channel",
// i.e. the faults the scheme defends against) is outside this module: the
// possibly corrupted word comes back on rx_in. The BCH decoder detects errors
// (non-zero syndromes) and corrects up to T of them, and the corrected
// product leaves on product.
//
// Only one BCH encoder exists. In the cycle the multiplier finishes it
// encodes the product; in the next cycle, when the word returns from the
// channel, it re-encodes the received message for the decoder's syndrome
// stage (the re-encoding trick). A multiplexer selects the encoder input.
//
// Defaults: M = 45 with BCH(63,45), T = 3 over GF(2^6). The 16-bit
// configuration is M = 16, MD = 5 (BCH(31,16), T = 3).
//
// Timing: start is accepted while ready is high. The multiplier finishes
// M+1 cycles after the start cycle; one cycle later code_valid pulses with
// code_out; rx_in must carry the received word in that same cycle (a
// combinational channel). out_valid pulses T+4 cycles after code_valid with
// product and err_detected, i.e. M+T+6 cycles after start (54 cycles for the
// default M = 45, T = 3). A new
// multiplication can start every M+1 cycles; the decoder overlaps with the
// next multiplication. Active-low synchronous reset.
module ft_multiplier_top
  import gf_pkg::*;
#(
  parameter int M     = 45,
  parameter int MD    = 6,
  parameter int T     = 3,
  parameter int DEPTH = 4,
  localparam int R    = bch_parity_bits(MD, T),
  localparam int N    = M + R
) (
  input  logic         clk,
  input  logic         rst_n,
  // multiplication request
  input  logic         start,
  input  logic [M-1:0] a,
  input  logic [M-1:0] b,
  input  logic [M-1:0] f,
  output logic         ready,
  // to / from the channel
  output logic         code_valid,
  output logic [N-1:0] code_out,
  input  logic [N-1:0] rx_in,
  // corrected result
  output logic         out_valid,
  output logic [M-1:0] product,
  output logic         err_detected
);

  if (N > (1 << MD) - 1) begin : g_len_check
    $error("ft_multiplier_top: M + parity bits exceed the BCH code length 2^MD - 1");
  end
  if (M + 1 <= T) begin : g_rate_check
    $error("ft_multiplier_top: the key-equation solver needs T cycles per word");
  end

  // ---- multiplier
  logic         mul_done;
  logic [M-1:0] mul_c;

  pb_multiplier #(.M(M)) u_mul (
    .clk   (clk),
    .rst_n (rst_n),
    .start (start),
    .a     (a),
    .b     (b),
    .f     (f),
    .ready (ready),
    .done  (mul_done),
    .c     (mul_c)
  );

  // ---- shared encoder
  logic [M-1:0] enc_msg;
  logic [R-1:0] enc_parity;
  logic [M-1:0] reenc_msg;

  assign enc_msg = code_valid ? reenc_msg : mul_c;

  bch_encoder #(.MD(MD), .T(T), .K(M)) u_enc (
    .msg    (enc_msg),
    .parity (enc_parity)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      code_valid <= 1'b0;
      code_out   <= '0;
    end else begin
      code_valid <= mul_done;
      if (mul_done) code_out <= {mul_c, enc_parity};
    end
  end

  // ---- decoder
  logic [N-1:0] corrected;

  bch_decoder #(.MD(MD), .T(T), .K(M), .DEPTH(DEPTH)) u_dec (
    .clk          (clk),
    .rst_n        (rst_n),
    .in_valid     (code_valid),
    .rx           (rx_in),
    .reenc_msg    (reenc_msg),
    .reenc_parity (enc_parity),
    .out_valid    (out_valid),
    .corrected    (corrected),
    .err_detected (err_detected)
  );

  // The corrected parity bits are not needed once the product is known.
  assign product = corrected[N-1:R];

  // The encoder serves one purpose per cycle.
  a_encoder_shared: assert property (@(posedge clk) disable iff (!rst_n) !(mul_done && code_valid));

endmodule
