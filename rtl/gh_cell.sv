// gh_cell -- the G / H building block of the sequential polynomial-basis
// multiplier.
//
// Function: i3 = i2 XOR (i AND i1), bit by bit over M bits. The same cell is
// used twice in the multiplier: as module G it performs the reduction step
// (i2 = P shifted left, i = p_{m-1}, i1 = field polynomial f), and as module
// H it accumulates the partial product (i2 = output of G, i = b_{m-k},
// i1 = A).
//
// Structure (follows the paper's NAND rewriting of the XOR, its eq. (9)):
// per bit an AND forms the product term b = i AND i1, a three-input NAND
// forms n1 = NOT(i2 AND i AND i1) = NAND(i2, b), and a classic three-NAND XOR
// finishes the job: i3 = NAND(NAND(i2, n1), NAND(b, n1)). The port names
// I1, I2, i, I3 and the M-bit widths are those of the paper's logic diagram.
// Purely combinational, no clock.
module gh_cell #(
  parameter int M = 45
) (
  input  logic [M-1:0] i1,
  input  logic [M-1:0] i2,
  input  logic         i,
  output logic [M-1:0] i3
);

  logic [M-1:0] prod;   // i AND i1
  logic [M-1:0] n1;     // first NAND level
  logic [M-1:0] n2;     // second NAND level, left gate
  logic [M-1:0] n3;     // second NAND level, right gate

  always_comb begin
    prod = i1 & {M{i}};
    n1   = ~(i2 & i1 & {M{i}});
    n2   = ~(i2 & n1);
    n3   = ~(prod & n1);
    i3   = ~(n2 & n3);
  end

endmodule
