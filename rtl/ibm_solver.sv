// ibm_solver -- key-equation solver: simplified inversionless
// Berlekamp-Massey algorithm for binary BCH codes.
//
// From the 2T syndromes S_1..S_2T it computes the error-locator polynomial
// lambda(x) = lambda_0 + lambda_1 x + ... + lambda_T x^T, whose roots are the
// inverses of the error locations (up to a non-zero scale factor, which does
// not move the roots). No field inversion is needed.
//
// Algorithm (one iteration per clock, T iterations). Start with lambda = 1,
// B = 1, gamma = 1, k = 0. In iteration r = 0, 2, 4, ..., 2T-2:
//     delta   = sum_i lambda_i * S_(r+1-i)
//     lambda' = gamma * lambda + delta * x * B
//     if (delta != 0 && k >= 0) { B' = x * lambda; gamma' = delta; k' = -k   }
//     else                      { B' = x^2 * B;    gamma' = gamma; k' = k+2 }
// This is the ordinary inversionless BM with the odd-numbered steps removed:
// for a binary code their discrepancies are always zero, so a binary BCH
// decoder needs only T steps instead of 2T. The paper names its solver (an
// iBM/FiBM solver) but gives no internals; this common formulation is the
// design's choice.
//
// Interface: start (one cycle) captures synd, where synd[j-1] = S_j, and
// initialises the registers; the following T clock edges run the T
// iterations, so done pulses T+1 cycles after the start cycle with lambda
// valid; lambda holds until the next start.
// busy is high while iterating; a start while busy is not allowed.
// Active-low synchronous reset.
module ibm_solver
  import gf_pkg::*;
#(
  parameter int MD = 6,
  parameter int T  = 3
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  gfe_t [2*T-1:0]   synd,
  output logic             busy,
  output logic             done,
  output gfe_t [T:0]       lambda
);

  localparam int IW = $clog2(T + 1);

  gfe_t [2*T-1:0] s_reg;
  gfe_t [T:0]     lam;
  gfe_t [T:0]     bpoly;
  gfe_t           gamma;
  int             kk;          // the BM "k" counter, may go negative
  logic [IW-1:0]  iter;

  gfe_t           delta;
  gfe_t [T:0]     lam_next;

  // Discrepancy and lambda update of the current iteration.
  always_comb begin
    int j;
    delta = '0;
    for (int i = 0; i <= T; i++) begin
      j = 2 * int'(iter) + 1 - i;
      if (j >= 1 && j <= 2 * T) delta = delta ^ gf_mul(lam[i], s_reg[j-1], MD);
    end
    for (int i = 0; i <= T; i++) begin
      lam_next[i] = gf_mul(gamma, lam[i], MD);
      if (i > 0) lam_next[i] = lam_next[i] ^ gf_mul(delta, bpoly[i-1], MD);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_reg <= '0;
      lam   <= '0;
      bpoly <= '0;
      gamma <= '0;
      kk    <= 0;
      iter  <= '0;
      busy  <= 1'b0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (busy) begin
        lam <= lam_next;
        if (delta != '0 && kk >= 0) begin
          bpoly <= {lam[T-1:0], gfe_t'(0)};
          gamma <= delta;
          kk    <= -kk;
        end else begin
          bpoly <= {bpoly[T-2:0], gfe_t'(0), gfe_t'(0)};
          kk    <= kk + 2;
        end
        iter <= iter + IW'(1);
        if (int'(iter) == T - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end else if (start) begin
        s_reg <= synd;
        lam   <= {{T{gfe_t'(0)}}, gfe_t'(1)};
        bpoly <= {{T{gfe_t'(0)}}, gfe_t'(1)};
        gamma <= gfe_t'(1);
        kk    <= 0;
        iter  <= '0;
        busy  <= 1'b1;
      end
    end
  end

  assign lambda = lam;

  // A new syndrome set must not arrive while the previous one is processed.
  a_no_start_when_busy: assert property (@(posedge clk) disable iff (!rst_n) !(start && busy));

endmodule
