// smm_top -- GEMM engine built around the Strassen multisystolic array.
//
// Computes C = A * B for an A of (2^R*m) x (2^R*X*k_tiles) and a B of
// (2^R*X*k_tiles) x (2^R*Y).  The product is split along K into k_tiles GEMM
// tiles; for each tile a B tile is loaded into the MXU's stationary
// (double-buffered) registers and the A tile streams through it one row
// vector per cycle, the tile products being summed in the C accumulator.
//
// Data path, in order: A and B vector memories (vec_mem) -> input reordering
// from the memories' row-major sub-block order to the MXU's quadtree order
// -> triangular skew buffers (tri_buf, lane k delayed k cycles) -> SMM_R MXU
// (smm_mxu: A/B addition vectors, 7^R X x Y systolic arrays, Q addition
// vectors) -> triangular de-skew buffer -> reordering back to row-major ->
// c_accum.  smm_ctrl sequences the tiles.
//
// Memory layouts (one word = one MXU input or output vector):
//   A word t*m + i : rows i, i+m, ..., i+(2^R-1)m of A tile t; element
//                    ((p*2^R + q)*X + k) = A_t[p*m + i][q*X + k]
//   B word t*Y + j : element ((q*2^R + p)*X + k) = B_t[p*X + k][q*Y + j]
//                    (the transposed order of the A layout)
//   C word i       : element ((p*2^R + q)*Y + j) = C[p*m + i][q*Y + j]
// Signed two's complement W-bit inputs, ACC_W-bit signed results.
//
// Interface: host write ports for A and B, start/m_rows/k_tiles, busy (from
// start until the last result row is accumulated), done (one-cycle pulse at
// the end), stall (the A stream is waiting for a B tile), and a C read port
// (1-cycle latency).  A new run may start once
// busy is low.  Synchronous active-low reset for the control path.
//
// Timing: with m_rows >= Y the MXU takes one A row per cycle without gaps,
// so an n x n product (n = 2^R*m) takes n/2^R cycles of MXU time.  The
// first result row is written 2 + smm_pkg::mxu_latency() cycles after the
// first A read.
//
// Defaults follow the paper's main configuration: two Strassen levels over
// 6 x 6 arrays with 16-bit inputs (49 arrays, 1764 multipliers, minimum
// full-rate matrix 24 x 24).  Memory depths, accumulator width and the
// host interface are this design's choices.
module smm_top #(
  parameter int unsigned W            = 16,
  parameter int unsigned R            = 2,
  parameter int unsigned X            = 6,
  parameter int unsigned Y            = 6,
  parameter bit          Q_EXTRA_REGS = 1'b0,
  parameter int unsigned A_DEPTH      = 256,
  parameter int unsigned B_DEPTH      = 64,
  parameter int unsigned C_DEPTH      = 64,
  parameter int unsigned KT_MAX       = 10,
  parameter int unsigned ACC_W        = smm_pkg::cw(W, R, X) + $clog2(KT_MAX + 1),
  localparam int unsigned P           = 2**R,
  localparam int unsigned NS          = 4**R,
  localparam int unsigned CWD         = smm_pkg::cw(W, R, X),
  localparam int unsigned AAW         = $clog2(A_DEPTH),
  localparam int unsigned BAW         = $clog2(B_DEPTH),
  localparam int unsigned CAW         = $clog2(C_DEPTH),
  localparam int unsigned MW          = $clog2(C_DEPTH + 1),
  localparam int unsigned KW          = $clog2(KT_MAX + 1),
  localparam int unsigned DW          = (Y > 1) ? $clog2(Y) : 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // host access to the operand memories
  input  logic                          a_wr_en,
  input  logic [AAW-1:0]                a_wr_addr,
  input  logic [NS*X-1:0][W-1:0]        a_wr_data,
  input  logic                          b_wr_en,
  input  logic [BAW-1:0]                b_wr_addr,
  input  logic [NS*X-1:0][W-1:0]        b_wr_data,
  // command
  input  logic                          start,
  input  logic [MW-1:0]                 m_rows,
  input  logic [KW-1:0]                 k_tiles,
  output logic                          busy,
  output logic                          done,
  output logic                          stall,
  // result read-back
  input  logic [CAW-1:0]                c_rd_addr,
  output logic [NS*Y-1:0][ACC_W-1:0]    c_rd_data
);
  import smm_pkg::*;

  localparam int unsigned LAT = mxu_latency(R, X, Y, 32'(Q_EXTRA_REGS));

  // ---------------------------------------------------------------- control
  logic           ctl_busy;
  logic           a_rd_en, a_bank, a_first, a_last;
  logic [MW-1:0]  a_row;
  logic [AAW-1:0] a_rd_addr;
  logic           b_rd_en, b_bank;
  logic [DW-1:0]  b_dest;
  logic [BAW-1:0] b_rd_addr;

  smm_ctrl #(
    .Y(Y), .A_DEPTH(A_DEPTH), .B_DEPTH(B_DEPTH), .M_MAX(C_DEPTH), .KT_MAX(KT_MAX)
  ) u_ctrl (
    .clk, .rst_n, .start(start && !busy), .m_rows, .k_tiles,
    .busy(ctl_busy), .stall,
    .a_rd_en, .a_rd_addr, .a_bank, .a_row, .a_first, .a_last,
    .b_rd_en, .b_rd_addr, .b_bank, .b_dest
  );

  // --------------------------------------------------------------- memories
  logic [NS*X-1:0][W-1:0] a_word, b_word;

  vec_mem #(.DW(NS*X*W), .DEPTH(A_DEPTH)) u_a_mem (
    .clk, .wr_en(a_wr_en), .wr_addr(a_wr_addr), .wr_data(a_wr_data),
    .rd_en(a_rd_en), .rd_addr(a_rd_addr), .rd_data(a_word)
  );
  vec_mem #(.DW(NS*X*W), .DEPTH(B_DEPTH)) u_b_mem (
    .clk, .wr_en(b_wr_en), .wr_addr(b_wr_addr), .wr_data(b_wr_data),
    .rd_en(b_rd_en), .rd_addr(b_rd_addr), .rd_data(b_word)
  );

  // Control and tags aligned with the memory read data (1 cycle).
  typedef struct packed {
    logic          valid;
    logic          first;
    logic          last;
    logic [MW-1:0] row;
  } row_tag_t;

  // Per-lane control that travels with the A and B data through the skew
  // buffers and the addition-vector pipeline registers.
  typedef struct packed {
    logic          a_bank;  // B buffer this A row is multiplied with
    logic          b_en;    // this cycle carries a B column
    logic          b_bank;  // buffer the B column is written to
    logic [DW-1:0] b_dest;  // array row the B column is written to
  } lane_ctl_t;
  localparam int unsigned CTW = $bits(lane_ctl_t);

  row_tag_t  tag_in;
  lane_ctl_t ctl_in;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      tag_in <= '0;
      ctl_in <= '0;
    end else begin
      tag_in <= '{valid: a_rd_en, first: a_first, last: a_last, row: a_row};
      // A row data is only meaningful when valid; invalid rows use bank 0.
      ctl_in <= '{a_bank: a_bank & a_rd_en, b_en: b_rd_en, b_bank: b_bank, b_dest: b_dest};
    end
  end

  // ------------------------------------------ reorder to quadtree, then skew
  logic [W-1:0]   a_qt [NS*X];
  logic [W-1:0]   b_qt [NS*X];
  logic [W-1:0]   a_sk [NS*X];
  logic [W-1:0]   b_sk [NS*X];
  logic [CTW-1:0] ctl_rep [X];
  logic [CTW-1:0] ctl_sk  [X];

  for (genvar p = 0; p < P; p++) begin : g_p
    for (genvar q = 0; q < P; q++) begin : g_q
      for (genvar k = 0; k < X; k++) begin : g_k
        // A words are row-major over sub-blocks, B words column-major.
        assign a_qt[qt_index(p, q, R)*X + k] = a_word[(p*P + q)*X + k];
        assign b_qt[qt_index(p, q, R)*X + k] = b_word[(q*P + p)*X + k];
      end
    end
  end

  for (genvar k = 0; k < X; k++) begin : g_ctl
    assign ctl_rep[k] = ctl_in;
  end

  tri_buf #(.DW(W), .LANES(NS*X), .G(X)) u_a_skew (.clk, .d(a_qt), .q(a_sk));
  tri_buf #(.DW(W), .LANES(NS*X), .G(X)) u_b_skew (.clk, .d(b_qt), .q(b_sk));
  tri_buf #(.DW(CTW), .LANES(X), .G(X)) u_c_skew (.clk, .d(ctl_rep), .q(ctl_sk));

  // ----------------------------------------------------------------- MXU
  logic signed [W-1:0]   a_mx [NS*X];
  logic signed [W-1:0]   b_mx [NS*X];
  logic                  a_bank_mx [X];
  logic                  b_en_mx   [X];
  logic                  b_bank_mx [X];
  logic [DW-1:0]         b_dest_mx [X];
  logic signed [CWD-1:0] c_mx [NS*Y];

  for (genvar i = 0; i < NS*X; i++) begin : g_mx_in
    assign a_mx[i] = a_sk[i];
    assign b_mx[i] = b_sk[i];
  end
  for (genvar k = 0; k < X; k++) begin : g_mx_ctl
    lane_ctl_t ctl_k;
    assign ctl_k        = ctl_sk[k];
    assign a_bank_mx[k] = ctl_k.a_bank;
    assign b_en_mx[k]   = ctl_k.b_en;
    assign b_bank_mx[k] = ctl_k.b_bank;
    assign b_dest_mx[k] = ctl_k.b_dest;
  end

  smm_mxu #(
    .R(R), .W(W), .X(X), .Y(Y), .CW(CWD), .Q_EXTRA_REGS(Q_EXTRA_REGS)
  ) u_mxu (
    .clk, .a(a_mx), .a_bank(a_bank_mx), .b(b_mx), .b_en(b_en_mx), .b_bank(b_bank_mx),
    .b_dest(b_dest_mx), .c(c_mx)
  );

  // ---------------------------------------------- de-skew, reorder, accumulate
  logic [CWD-1:0]        c_u   [NS*Y];
  logic [CWD-1:0]        c_dsk [NS*Y];
  logic signed [CWD-1:0] c_rm  [NS*Y];

  for (genvar i = 0; i < NS*Y; i++) begin : g_c_u
    assign c_u[i] = c_mx[i];
  end

  tri_buf #(.DW(CWD), .LANES(NS*Y), .G(Y)) u_c_deskew (.clk, .d(c_u), .q(c_dsk));

  for (genvar p = 0; p < P; p++) begin : g_cp
    for (genvar q = 0; q < P; q++) begin : g_cq
      for (genvar j = 0; j < Y; j++) begin : g_cj
        assign c_rm[(p*P + q)*Y + j] = c_dsk[qt_index(p, q, R)*Y + j];
      end
    end
  end

  // Row tags travel alongside the MXU in a plain delay line.
  row_tag_t tag_pipe [LAT];
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < LAT; i++) tag_pipe[i] <= '0;
    end else begin
      tag_pipe[0] <= tag_in;
      for (int unsigned i = 1; i < LAT; i++) tag_pipe[i] <= tag_pipe[i-1];
    end
  end

  row_tag_t tag_out;
  assign tag_out = tag_pipe[LAT-1];

  logic signed [ACC_W-1:0] c_rd [NS*Y];

  c_accum #(.NL(NS*Y), .CW(CWD), .ACC_W(ACC_W), .DEPTH(C_DEPTH)) u_acc (
    .clk, .in_valid(tag_out.valid), .in_first(tag_out.first),
    .in_addr(CAW'(tag_out.row)), .in_c(c_rm),
    .rd_addr(c_rd_addr), .rd_data(c_rd)
  );

  for (genvar i = 0; i < NS*Y; i++) begin : g_rd
    assign c_rd_data[i] = c_rd[i];
  end

  // --------------------------------------------------------------- status
  logic draining;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      draining <= 1'b0;
      done     <= 1'b0;
    end else begin
      done <= tag_out.valid && tag_out.last;
      if (start && !busy)                  draining <= 1'b1;
      else if (tag_out.valid && tag_out.last) draining <= 1'b0;
    end
  end
  assign busy = draining;

  // The MXU must not be asked to run faster than the memories allow.
  ctl_busy_covered: assert property (@(posedge clk) disable iff (!rst_n)
    ctl_busy |-> busy);

endmodule
