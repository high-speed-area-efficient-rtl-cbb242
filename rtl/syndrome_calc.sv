// syndrome_calc -- parallel syndrome generator with re-encoding input.
//
// A received word r(x) = q(x) g(x) + rem(x) has the same syndromes as its
// remainder rem(x) modulo the generator polynomial, because g(alpha^j) = 0
// for j = 1..2t. The decoder obtains rem(x) by re-encoding: the received
// message bits go through the (otherwise idle) BCH encoder and the resulting
// parity is XORed with the received parity. This block therefore only has to
// evaluate an R-bit polynomial instead of an n-bit one.
//
// The odd syndromes S1, S3, ..., S(2T-1) are evaluated in parallel as
// constant XOR networks, S_j = sum_i rem_i * alpha^(i*j); the even ones use
// the binary-code identity S_2j = (S_j)^2, so only squarers are added. All R
// input bits are processed in one cycle (fully parallel).
//
// Interface: synd[j-1] holds S_j, j = 1..2T, as GF(2^MD) elements (low MD
// bits of a gfe_t). err_detected is high when any syndrome is non-zero,
// i.e. the received word is not a codeword.
// Timing: one register stage; out_valid follows in_valid by one cycle.
module syndrome_calc
  import gf_pkg::*;
#(
  parameter int MD = 6,
  parameter int T  = 3,
  localparam int R = bch_parity_bits(MD, T)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [R-1:0]         rem,
  output logic                 out_valid,
  output gfe_t [2*T-1:0]       synd,
  output logic                 err_detected
);

  function automatic int odd_part(input int j);
    int o;
    o = j;
    while (o % 2 == 0) o = o / 2;
    return o;
  endfunction

  function automatic int squarings(input int j);
    int o, c;
    o = j;
    c = 0;
    while (o % 2 == 0) begin
      o = o / 2;
      c++;
    end
    return c;
  endfunction

  localparam int         NF   = (1 << MD) - 1;     // full code length 2^MD - 1
  localparam alpha_tab_t ATAB = gf_alpha_table(MD);

  gfe_t [2*T-1:0] s_odd;    // entry j-1 valid for odd j: constant XOR networks
  gfe_t [2*T-1:0] s_next;   // all syndromes

  always_comb begin
    s_odd = '0;
    for (int j = 1; j <= 2 * T; j += 2) begin
      for (int i = 0; i < R; i++)
        if (rem[i]) s_odd[j-1] = s_odd[j-1] ^ ATAB[(i * j) % NF];
    end
  end

  // even syndromes by repeated squaring: S_j = S_o^(2^s) with j = o * 2^s
  for (genvar j = 1; j <= 2 * T; j++) begin : g_synd
    localparam int ODD = odd_part(j);
    localparam int SQ  = squarings(j);
    always_comb begin
      gfe_t v;
      v = s_odd[ODD-1];
      for (int s = 0; s < SQ; s++) v = gf_sq(v, MD);
      s_next[j-1] = v;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid    <= 1'b0;
      synd         <= '0;
      err_detected <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        synd         <= s_next;
        err_detected <= |s_next;
      end
    end
  end

endmodule
