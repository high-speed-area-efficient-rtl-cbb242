// pb_multiplier -- sequential polynomial-basis multiplier over GF(2^M).
//
// Computes c = a * b mod f(x), where f(x) = x^M + f[M-1] x^(M-1) + ... + f[0]
// is an irreducible polynomial given on the f port (its leading x^M term is
// implicit). The product is built MSB-first by the interleaved recursion
//     P(0) = 0,  P(k) = (x * P(k-1) mod f) XOR b_{M-k} * A,  k = 1..M,
// and P(M) = c. Module G (a gh_cell) performs x*P mod f: it takes the
// register output shifted left by one (the SL box), the top bit p_{M-1} as its
// select and f as the added operand. Module H (a second gh_cell) adds A,
// selected by the current multiplier bit b_{M-k}. Register 1 holds A,
// Register 2 holds P; this wiring follows the paper's top-level diagram.
//
// Design choices not fixed by the paper: B is held in a shift register that
// presents its MSB as b_{M-k}; an iteration counter and a start/done
// handshake control the M iterations; Register 2 is cleared on start.
//
// Timing: start is accepted when ready is high (a, b and f sampled then, f
// must stay stable until done). The start edge loads the registers, the next
// M edges perform the M iterations, so done pulses for one cycle M+1 cycles
// after the start cycle, with the product on c; c holds until the next
// start. ready is high again in the done cycle, so a new product can start
// every M+1 cycles.
// Active-low synchronous reset.
module pb_multiplier #(
  parameter int M = 45
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [M-1:0] a,
  input  logic [M-1:0] b,
  input  logic [M-1:0] f,
  output logic         ready,
  output logic         done,
  output logic [M-1:0] c
);

  localparam int CW = $clog2(M + 1);

  logic [M-1:0]  reg1_a;     // Register 1: multiplicand A
  logic [M-1:0]  reg2_p;     // Register 2: partial product P
  logic [M-1:0]  b_shift;    // multiplier bits, MSB first
  logic [CW-1:0] count;      // iterations still to do
  logic          busy;

  logic [M-1:0]  g_out;      // x * P mod f
  logic [M-1:0]  h_out;      // next P

  // Module G: reduction. i2 = SL(P), i = p_{M-1}, i1 = f.
  gh_cell #(.M(M)) u_g (
    .i1 (f),
    .i2 ({reg2_p[M-2:0], 1'b0}),
    .i  (reg2_p[M-1]),
    .i3 (g_out)
  );

  // Module H: accumulation. i2 = G output, i = b_{M-k}, i1 = A.
  gh_cell #(.M(M)) u_h (
    .i1 (reg1_a),
    .i2 (g_out),
    .i  (b_shift[M-1]),
    .i3 (h_out)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      reg1_a  <= '0;
      reg2_p  <= '0;
      b_shift <= '0;
      count   <= '0;
      busy    <= 1'b0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      if (busy) begin
        reg2_p  <= h_out;
        b_shift <= {b_shift[M-2:0], 1'b0};
        count   <= count - CW'(1);
        if (count == CW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end else if (start) begin
        reg1_a  <= a;
        b_shift <= b;
        reg2_p  <= '0;
        count   <= CW'(M);
        busy    <= 1'b1;
      end
    end
  end

  assign ready = !busy;
  assign c     = reg2_p;

endmodule
