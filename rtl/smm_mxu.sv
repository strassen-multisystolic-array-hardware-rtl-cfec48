// smm_mxu -- SMM_r MXU: Strassen multisystolic array for R recursion levels.
//
// One A vector (row i of all 4^R A sub-blocks of the lowest level) and, while
// a B tile is being loaded, one B vector (column j of all 4^R B sub-blocks)
// enter per cycle.  At level R the vectors are split into their four quadrant
// slices, the A and B addition vectors form T1..T7 and S1..S7, and seven
// SMM_{R-1} MXUs multiply the T/S pairs; the seven Q results are combined by
// the Q addition vectors into the four C quadrants.  The module instantiates
// itself with R-1 (and inputs one bit wider) until R = 0, where a plain X x Y
// systolic array (mm_mxu) is used.  An SMM_R MXU therefore holds 7^R arrays
// and 7^R * X * Y multipliers, against 8^R arrays for conventional blocking.
//
// Interface (quadtree sub-block order, see smm_pkg):
//   a[s*X + k]  element k of row i of A sub-block s      (W bits)
//   b[s*X + k]  element k of column j of B sub-block s    (W bits)
//   c[s*Y + j]  element j of row i of C sub-block s       (CW bits)
//   a_bank[k], b_en[k], b_bank[k], b_dest[k]: lane-k control that accompanies
//   the data (b_dest: lowest-level array row the B column is written to).
// All lanes k are expected skewed by k cycles (triangular buffer outside).
//
// Timing: each level adds one register in the A/B addition vectors (the lane
// controls are delayed with it) and 1 (+1 with Q_EXTRA_REGS) in the Q addition
// vectors; see smm_pkg::mxu_latency.  A new A vector is accepted every cycle.
//
// The structure follows the paper's top-level SMM_r diagram; pipeline register
// placement is this design's choice.
//
// R defaults to 0 (a single array); users such as smm_top set it.  With a
// default of R >= 1 a stand-alone lint of this module would have to elaborate
// the top instance recursing into itself, which verilator does not (it drops
// the inner instances and reports the sub-MXU wires as undriven).
module smm_mxu #(
  parameter int unsigned R            = 0,
  parameter int unsigned W            = 16,
  parameter int unsigned X            = 6,
  parameter int unsigned Y            = 6,
  parameter int unsigned CW           = 39,
  parameter bit          Q_EXTRA_REGS = 1'b0,
  localparam int unsigned DW          = (Y > 1) ? $clog2(Y) : 1
) (
  input  logic                clk,
  input  logic signed [W-1:0]  a      [(4**R)*X],
  input  logic                 a_bank [X],
  input  logic signed [W-1:0]  b      [(4**R)*X],
  input  logic                 b_en   [X],
  input  logic                 b_bank [X],
  input  logic [DW-1:0]        b_dest [X],
  output logic signed [CW-1:0] c      [(4**R)*Y]
);

  if (R == 0) begin : g_base
    mm_mxu #(.AW(W), .X(X), .Y(Y), .CW(CW)) u_mm (
      .clk   (clk),
      .a     (a),
      .a_bank(a_bank),
      .b     (b),
      .b_en  (b_en),
      .b_bank(b_bank),
      .b_dest(b_dest),
      .c     (c)
    );
  end else begin : g_rec
    localparam int unsigned LA = (4**(R-1)) * X;  // elements per A/B quadrant
    localparam int unsigned LC = (4**(R-1)) * Y;  // elements per C quadrant

    logic signed [W:0]    t_flat [7*LA];
    logic signed [W:0]    s_flat [7*LA];
    logic signed [CW-1:0] q_flat [7*LC];
    logic                 a_bank_d [X];
    logic                 b_en_d   [X];
    logic                 b_bank_d [X];
    logic [DW-1:0]        b_dest_d [X];

    a_add_vec #(.W(W), .L(LA)) u_a_add (.clk(clk), .a(a), .t(t_flat));
    b_add_vec #(.W(W), .L(LA)) u_b_add (.clk(clk), .b(b), .s(s_flat));

    // Lane controls follow the data through the addition-vector register.
    always_ff @(posedge clk) begin
      a_bank_d <= a_bank;
      b_en_d   <= b_en;
      b_bank_d <= b_bank;
      b_dest_d <= b_dest;
    end

    for (genvar x = 0; x < 7; x++) begin : g_sub
      logic signed [W:0]    t_x [LA];
      logic signed [W:0]    s_x [LA];
      logic signed [CW-1:0] q_x [LC];

      for (genvar e = 0; e < LA; e++) begin : g_in
        assign t_x[e] = t_flat[x*LA+e];
        assign s_x[e] = s_flat[x*LA+e];
      end
      for (genvar e = 0; e < LC; e++) begin : g_out
        assign q_flat[x*LC+e] = q_x[e];
      end

      smm_mxu #(
        .R(R-1), .W(W+1), .X(X), .Y(Y), .CW(CW), .Q_EXTRA_REGS(Q_EXTRA_REGS)
      ) u_sub (
        .clk   (clk),
        .a     (t_x),
        .a_bank(a_bank_d),
        .b     (s_x),
        .b_en  (b_en_d),
        .b_bank(b_bank_d),
        .b_dest(b_dest_d),
        .c     (q_x)
      );
    end

    q_add_vec #(.CW(CW), .L(LC), .EXTRA_REGS(Q_EXTRA_REGS)) u_q_add (
      .clk(clk), .q(q_flat), .c(c)
    );
  end

endmodule
