// mm_mxu -- MM_0 MXU: the conventional X x Y weight-stationary systolic array
// instantiated at the lowest recursion level of the Strassen MXU.
//
// X columns and Y rows of smm_pe.  Column k receives lane k of the A row
// (a_{i,k}), which descends one row per cycle; row y holds one column of the
// stationary B sub-block and forms a dot product left to right, its result
// leaving at the right edge.  B columns are loaded down the columns of PEs,
// each element carrying the row it is meant for (b_dest); the loader sends
// column j to row Y-1-j, and the outputs are renumbered so that c[j] is
// column j of the C row.
//
// Timing: inputs are expected skewed, lane k one cycle after lane k-1 (the
// triangular buffers outside the MXU do this).  If lane 0 of A row i enters at
// cycle t, c[j] of C row i is valid during cycle t + X + Y - j, i.e. the
// outputs are skewed the other way and are de-skewed by a triangular buffer
// of depth j.  B columns are loaded with the same lane skew.
//
// From the paper: the array of PEs with A entering from the top and partial
// sums flowing to the right (its MM MXU and PE figures).  The ordering of rows
// against B columns is this design's choice.
module mm_mxu #(
  parameter int unsigned AW = 18,
  parameter int unsigned X  = 6,
  parameter int unsigned Y  = 6,
  parameter int unsigned CW = 39,
  localparam int unsigned DW = (Y > 1) ? $clog2(Y) : 1
) (
  input  logic                 clk,
  input  logic signed [AW-1:0] a      [X],
  input  logic                 a_bank [X],
  input  logic signed [AW-1:0] b      [X],
  input  logic                 b_en   [X],
  input  logic                 b_bank [X],
  input  logic [DW-1:0]        b_dest [X],
  output logic signed [CW-1:0] c      [Y]
);

  // Vertical (A, bank, B) and horizontal (partial sum) nets.
  logic signed [AW-1:0] a_v  [Y+1][X];
  logic                 ab_v [Y+1][X];
  logic signed [AW-1:0] b_v  [Y+1][X];
  logic                 be_v [Y+1][X];
  logic                 bb_v [Y+1][X];
  logic [DW-1:0]        bd_v [Y+1][X];
  logic signed [CW-1:0] c_h  [Y][X+1];

  for (genvar k = 0; k < X; k++) begin : g_top
    assign a_v[0][k]  = a[k];
    assign ab_v[0][k] = a_bank[k];
    assign b_v[0][k]  = b[k];
    assign be_v[0][k] = b_en[k];
    assign bb_v[0][k] = b_bank[k];
    assign bd_v[0][k] = b_dest[k];
  end

  for (genvar y = 0; y < Y; y++) begin : g_row
    assign c_h[y][0] = '0;
    for (genvar k = 0; k < X; k++) begin : g_col
      smm_pe #(.AW(AW), .CW(CW), .DW(DW), .ROW(y)) u_pe (
        .clk       (clk),
        .a_in      (a_v[y][k]),
        .a_bank_in (ab_v[y][k]),
        .a_out     (a_v[y+1][k]),
        .a_bank_out(ab_v[y+1][k]),
        .b_in      (b_v[y][k]),
        .b_en_in   (be_v[y][k]),
        .b_bank_in (bb_v[y][k]),
        .b_dest_in (bd_v[y][k]),
        .b_out     (b_v[y+1][k]),
        .b_en_out  (be_v[y+1][k]),
        .b_bank_out(bb_v[y+1][k]),
        .b_dest_out(bd_v[y+1][k]),
        .c_in      (c_h[y][k]),
        .c_out     (c_h[y][k+1])
      );
    end
    assign c[Y-1-y] = c_h[y][X];
  end

endmodule
