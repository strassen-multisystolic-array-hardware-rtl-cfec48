// a_add_vec -- A addition vectors of one Strassen recursion level.
//
// Forms the seven T operands of Strassen's algorithm from the four quadrant
// slices of an A vector, element by element:
//   T1 = A11 + A22   T2 = A21 + A22   T3 = A11   T4 = A22
//   T5 = A11 + A12   T6 = A21 - A11   T7 = A12 - A22
// Each quadrant slice holds L elements (one row of each of its sub-blocks);
// the adders are L wide, five vectors of them as in the paper.  Outputs are one
// bit wider than the inputs; T3 and T4 are sign-extended so that all seven
// lower-level MXUs have the same width.
//
// Interface: a[q*L + e] is element e of quadrant q (0 = A11, 1 = A12,
// 2 = A21, 3 = A22); t[(x-1)*L + e] is element e of T_x.
// Timing: the outputs are registered, 1 cycle.  The equations and the 1-bit
// growth are the paper's; the output register is this design's choice.
module a_add_vec #(
  parameter int unsigned W = 16,
  parameter int unsigned L = 24
) (
  input  logic               clk,
  input  logic signed [W-1:0] a [4*L],
  output logic signed [W:0]   t [7*L]
);
  import smm_pkg::*;

  always_ff @(posedge clk) begin
    for (int unsigned e = 0; e < L; e++) begin
      t[0*L+e] <= (W+1)'(a[Q11*L+e]) + (W+1)'(a[Q22*L+e]);
      t[1*L+e] <= (W+1)'(a[Q21*L+e]) + (W+1)'(a[Q22*L+e]);
      t[2*L+e] <= (W+1)'(a[Q11*L+e]);
      t[3*L+e] <= (W+1)'(a[Q22*L+e]);
      t[4*L+e] <= (W+1)'(a[Q11*L+e]) + (W+1)'(a[Q12*L+e]);
      t[5*L+e] <= (W+1)'(a[Q21*L+e]) - (W+1)'(a[Q11*L+e]);
      t[6*L+e] <= (W+1)'(a[Q12*L+e]) - (W+1)'(a[Q22*L+e]);
    end
  end

endmodule
