// b_add_vec -- B addition vectors of one Strassen recursion level.
//
// Forms the seven S operands of Strassen's algorithm from the four quadrant
// slices of a B vector (one column of every B sub-block), element by element:
//   S1 = B11 + B22   S2 = B11         S3 = B12 - B22   S4 = B21 - B11
//   S5 = B22         S6 = B11 + B12   S7 = B21 + B22
// Five L-wide adder/subtractor vectors, outputs one bit wider than the inputs
// (S2 and S5 sign-extended).
//
// Interface: b[q*L + e] is element e of quadrant q (0 = B11, 1 = B12,
// 2 = B21, 3 = B22); s[(x-1)*L + e] is element e of S_x.
// Timing: registered outputs, 1 cycle (this design's choice; the equations and
// the 1-bit growth are the paper's).
module b_add_vec #(
  parameter int unsigned W = 16,
  parameter int unsigned L = 24
) (
  input  logic               clk,
  input  logic signed [W-1:0] b [4*L],
  output logic signed [W:0]   s [7*L]
);
  import smm_pkg::*;

  always_ff @(posedge clk) begin
    for (int unsigned e = 0; e < L; e++) begin
      s[0*L+e] <= (W+1)'(b[Q11*L+e]) + (W+1)'(b[Q22*L+e]);
      s[1*L+e] <= (W+1)'(b[Q11*L+e]);
      s[2*L+e] <= (W+1)'(b[Q12*L+e]) - (W+1)'(b[Q22*L+e]);
      s[3*L+e] <= (W+1)'(b[Q21*L+e]) - (W+1)'(b[Q11*L+e]);
      s[4*L+e] <= (W+1)'(b[Q22*L+e]);
      s[5*L+e] <= (W+1)'(b[Q11*L+e]) + (W+1)'(b[Q12*L+e]);
      s[6*L+e] <= (W+1)'(b[Q21*L+e]) + (W+1)'(b[Q22*L+e]);
    end
  end

endmodule
