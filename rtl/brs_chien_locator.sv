// brs_chien_locator -- error locator combining the Berlekamp-Rumsey-Solomon
// (BRS) affine-polynomial method with Chien-style constant multipliers.
//
// Task: for every code position p (0 <= p < N) decide whether
// lambda(alpha^(NF-p)) = 0, NF = 2^MD - 1. A root alpha^i means an error at
// position NF - i, so err_vec[p] = 1 marks a bit to flip.
//
// Method. The locator polynomial (degree <= 5) is split as
//     lambda(y) = A0(y) + y^3 * A1(y)
//     A0(y) = f0 + (f1 y + f2 y^2 + f4 y^4),   A1(y) = f3 + (f5 y^2),
// where both bracketed parts are linearized polynomials L(y) (only powers
// y^(2^j)), so A0 and A1 are affine polynomials. A linearized polynomial is
// GF(2)-linear: for y = sum_k y_k alpha^k, L(y) = sum_k y_k L(alpha^k). Stage
// 1 therefore computes only the MD basis values L0(alpha^k) and L1(alpha^k)
// (multiplications by constants). In stage 2 the value at every position is
// a pure XOR of the basis values selected by the (constant) bits of y; no
// multiplier is needed per position for A0 and A1. The remaining y^3 factor is
// a multiplication by a per-position constant, as in a Chien search. All N
// positions are evaluated in parallel.
//
// The split and the basis-table principle follow the paper's description of
// the BRS method and its GF(2^3) example; the exact grouping for degree up to
// 5, the two-stage pipeline and the fully parallel evaluation are this
// design's choices (the paper gives no circuit).
//
// Interface: start (one cycle) samples lambda; done pulses 2 cycles later
// with err_vec valid; err_vec holds until the next result. Active-low
// synchronous reset.
module brs_chien_locator
  import gf_pkg::*;
#(
  parameter int MD = 6,
  parameter int T  = 3,
  parameter int N  = 63
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  gfe_t [T:0]     lambda,
  output logic           done,
  output logic [N-1:0]   err_vec
);

  localparam int         NF   = (1 << MD) - 1;
  localparam alpha_tab_t ATAB = gf_alpha_table(MD);

  if (T > T_MAX) begin : g_t_check
    $error("brs_chien_locator: the polynomial split supports T <= 5");
  end
  if (N > NF) begin : g_n_check
    $error("brs_chien_locator: code length exceeds 2^MD - 1");
  end

  // coefficients f0..f5 (zero above the degree bound T)
  gfe_t [5:0] fco;
  always_comb begin
    fco = '0;
    for (int i = 0; i <= T; i++) fco[i] = lambda[i];
  end

  // Stage 1: basis tables of the two linearized parts.
  gfe_t [MD-1:0] tab0_next, tab1_next;
  always_comb begin
    for (int k = 0; k < MD; k++) begin
      tab0_next[k] = gf_mul(fco[1], ATAB[k % NF], MD)
                   ^ gf_mul(fco[2], ATAB[(2 * k) % NF], MD)
                   ^ gf_mul(fco[4], ATAB[(4 * k) % NF], MD);
      tab1_next[k] = gf_mul(fco[5], ATAB[(2 * k) % NF], MD);
    end
  end

  gfe_t [MD-1:0] tab0, tab1;
  gfe_t          f0_r, f3_r;
  logic          stage1_v;

  // Stage 2: evaluate every position.
  logic [N-1:0] err_next;
  always_comb begin
    gfe_t y, a0, a1, v;
    int   e;
    for (int p = 0; p < N; p++) begin
      e  = (NF - p) % NF;
      y  = ATAB[e];
      a0 = f0_r;
      a1 = f3_r;
      for (int k = 0; k < MD; k++) begin
        if (y[k]) begin
          a0 = a0 ^ tab0[k];
          a1 = a1 ^ tab1[k];
        end
      end
      v = a0 ^ gf_mul(a1, ATAB[(3 * e) % NF], MD);
      err_next[p] = (v == '0);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      tab0     <= '0;
      tab1     <= '0;
      f0_r     <= '0;
      f3_r     <= '0;
      stage1_v <= 1'b0;
      done     <= 1'b0;
      err_vec  <= '0;
    end else begin
      stage1_v <= start;
      done     <= stage1_v;
      if (start) begin
        tab0 <= tab0_next;
        tab1 <= tab1_next;
        f0_r <= fco[0];
        f3_r <= fco[3];
      end
      if (stage1_v) err_vec <= err_next;
    end
  end

endmodule
