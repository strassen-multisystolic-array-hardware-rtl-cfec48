// tri_buf -- triangular skew buffer.
//
// LANES parallel shift registers; lane l is delayed by (l mod G) cycles, so
// within every group of G lanes the delays form a triangle 0, 1, ..., G-1.
// At the MXU input (G = X) it makes element k of every A row / B column
// enter one cycle after element k-1, the order in which the systolic arrays
// consume it; at the output (G = Y) it realigns the C row, whose element j
// leaves the arrays j cycles early.  The shift registers always advance, one
// element per lane per cycle.
//
// The paper places such buffers (shift register SR_k of depth k) on every A,
// B and C sub-block at the top-level MXU boundary; the generic lane/group
// form is this design's.
module tri_buf #(
  parameter int unsigned DW    = 16,
  parameter int unsigned LANES = 6,
  parameter int unsigned G     = 6
) (
  input  logic          clk,
  input  logic [DW-1:0] d [LANES],
  output logic [DW-1:0] q [LANES]
);

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    localparam int unsigned D = l % G;
    if (D == 0) begin : g_wire
      assign q[l] = d[l];
    end else begin : g_sr
      logic [DW-1:0] sr [D];
      always_ff @(posedge clk) begin
        sr[0] <= d[l];
        for (int unsigned i = 1; i < D; i++) sr[i] <= sr[i-1];
      end
      assign q[l] = sr[D-1];
    end
  end

endmodule
