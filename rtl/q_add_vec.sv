// q_add_vec -- Q addition vectors of one Strassen recursion level.
//
// Combines the seven block products Q1..Q7 into the four C quadrants,
// element by element:
//   C11 = Q1 + Q4 - Q5 + Q7   C12 = Q3 + Q5
//   C21 = Q2 + Q4             C22 = Q1 - Q2 + Q3 + Q6
// The four-term sums are built as a two-level tree: first Q1+Q4, Q7-Q5,
// Q1-Q2 and Q3+Q6 (together with the two-term C12 and C21), then the two
// pairs are added.  Arithmetic is modulo 2^CW; the final C of the whole MXU
// fits in CW bits, so wrap-around in intermediate levels cancels exactly.
//
// Interface: q[(x-1)*L + e] is element e of Q_x; c[qd*L + e] is element e of
// quadrant qd (0 = C11, 1 = C12, 2 = C21, 3 = C22).
// Timing: outputs registered; latency 1 cycle, or 2 cycles with EXTRA_REGS=1,
// which puts a pipeline register between the two adder levels.  The paper
// evaluates such an "extra registers" variant to raise the clock frequency;
// its exact register placement and the default single output register are
// this design's choice.
module q_add_vec #(
  parameter int unsigned CW         = 39,
  parameter int unsigned L          = 24,
  parameter bit          EXTRA_REGS = 1'b0
) (
  input  logic               clk,
  input  logic signed [CW-1:0] q [7*L],
  output logic signed [CW-1:0] c [4*L]
);
  import smm_pkg::*;

  // First adder level: six partial sums per element.
  logic signed [CW-1:0] p1 [6*L];
  logic signed [CW-1:0] p2 [6*L];

  always_comb begin
    for (int unsigned e = 0; e < L; e++) begin
      p1[0*L+e] = q[0*L+e] + q[3*L+e];  // Q1 + Q4
      p1[1*L+e] = q[6*L+e] - q[4*L+e];  // Q7 - Q5
      p1[2*L+e] = q[2*L+e] + q[4*L+e];  // C12 = Q3 + Q5
      p1[3*L+e] = q[1*L+e] + q[3*L+e];  // C21 = Q2 + Q4
      p1[4*L+e] = q[0*L+e] - q[1*L+e];  // Q1 - Q2
      p1[5*L+e] = q[2*L+e] + q[5*L+e];  // Q3 + Q6
    end
  end

  if (EXTRA_REGS) begin : g_pipe
    always_ff @(posedge clk) p2 <= p1;
  end else begin : g_comb
    assign p2 = p1;
  end

  always_ff @(posedge clk) begin
    for (int unsigned e = 0; e < L; e++) begin
      c[Q11*L+e] <= p2[0*L+e] + p2[1*L+e];
      c[Q12*L+e] <= p2[2*L+e];
      c[Q21*L+e] <= p2[3*L+e];
      c[Q22*L+e] <= p2[4*L+e] + p2[5*L+e];
    end
  end

endmodule
