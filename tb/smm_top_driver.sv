// smm_top_driver -- stimulus and checking for smm_top, shared by the top-level
// testbenches.  It is instantiated next to a smm_top with the same parameter
// values and drives its ports.
//
// Each run writes a random A (2^R*m x 2^R*X*k_tiles) and B (2^R*X*k_tiles x
// 2^R*Y) into the operand memories in the documented layout, starts the
// engine, waits for done, reads C back and compares every element with a
// product computed by triple loops.  The runs cover:
//   * the smallest full-rate product (m = Y, one K tile, n = 2^R*Y),
//   * several K tiles with m = Y: B loads hidden behind A streaming and
//     partial products accumulated; the A stream must have no gaps, and the
//     cycle count from the first A read to done must match the latency,
//   * m < Y: the A stream must stall while B loads,
//   * operands at the extremes of the signed range (full-width products),
//   * the largest tile count the memories allow.
// Mechanism counters: stall cycles, overlapped B-load cycles, accumulating
// runs, full-rate runs; a counter left at zero is a failure.
// The watchdog is in the testbench that instantiates the driver.
//
// With RESNET = 1 the runs are instead slices of ResNet convolution layers
// lowered to GEMMs: 8-bit unsigned activations (after ReLU) times 8-bit signed
// weights, with the reduction length K = C_in*k*k zero-padded to whole tiles
// of 2^R*X.  A slice is the largest block of output pixels (rows) the memories
// hold by one block of 2^R*Y output channels (columns).
module smm_top_driver #(
  parameter int unsigned W       = 16,
  parameter int unsigned R       = 2,
  parameter int unsigned X       = 6,
  parameter int unsigned Y       = 6,
  parameter bit          QE      = 1'b0,
  parameter int unsigned A_DEPTH = 256,
  parameter int unsigned B_DEPTH = 64,
  parameter int unsigned C_DEPTH = 64,
  parameter int unsigned KT_MAX  = 10,
  parameter int unsigned ACC_W   = 2 * (W + R) + $clog2(X) + $clog2(KT_MAX + 1),
  parameter bit          RESNET  = 1'b0,
  localparam int unsigned P      = 2**R,
  localparam int unsigned NS     = 4**R,
  localparam int unsigned AAW    = $clog2(A_DEPTH),
  localparam int unsigned BAW    = $clog2(B_DEPTH),
  localparam int unsigned CAW    = $clog2(C_DEPTH),
  localparam int unsigned MW     = $clog2(C_DEPTH + 1),
  localparam int unsigned KW     = $clog2(KT_MAX + 1)
) (
  input  logic                       clk,
  output logic                       rst_n,
  output logic                       a_wr_en,
  output logic [AAW-1:0]             a_wr_addr,
  output logic [NS*X-1:0][W-1:0]     a_wr_data,
  output logic                       b_wr_en,
  output logic [BAW-1:0]             b_wr_addr,
  output logic [NS*X-1:0][W-1:0]     b_wr_data,
  output logic                       start,
  output logic [MW-1:0]              m_rows,
  output logic [KW-1:0]              k_tiles,
  input  logic                       busy,
  input  logic                       done,
  output logic [CAW-1:0]             c_rd_addr,
  input  logic [NS*Y-1:0][ACC_W-1:0] c_rd_data,
  // probes into the engine's sequencer
  input  logic                       p_a_rd_en,
  input  logic                       p_b_rd_en,
  input  logic                       p_stall
);

  // Latency of the MXU from the skew-buffer input to the de-skewed C row:
  // X + Y cycles of systolic array and buffers, 2 register levels per Strassen
  // level (3 with the extra Q-addition registers).
  localparam int unsigned LAT = X + Y + R * (QE ? 3 : 2);

  localparam int unsigned KMAX = P * X * KT_MAX;
  localparam int unsigned MMAX = P * C_DEPTH;
  localparam int unsigned N    = P * Y;

  int checks = 0, failures = 0;
  int n_stall = 0, n_overlap = 0, n_accum_runs = 0, n_fullrate_runs = 0, n_extreme_runs = 0;

  int     am [MMAX][KMAX];
  int     bm [KMAX][N];
  longint cm [MMAX][N];

  always @(posedge clk) begin
    if (rst_n && p_stall) n_stall++;
    if (rst_n && p_a_rd_en && p_b_rd_en) n_overlap++;
  end

  // Quantized ResNet operands: activations 0..255, weights -128..127.
  function automatic int rnd_act();
    return int'($urandom_range(0, 255));
  endfunction

  function automatic int rnd_wgt();
    return int'($urandom_range(0, 255)) - 128;
  endfunction

  function automatic int rnd(bit extreme);
    if (extreme) return ($urandom_range(0, 1) != 0) ? -(2**(W-1)) : (2**(W-1)) - 1;
    return int'($urandom_range(0, 2**W - 1)) - 2**(W-1);
  endfunction

  task automatic check(string what, longint got, longint exp_v);
    checks++;
    if (got != exp_v) begin
      failures++;
      if (failures <= 10) $display("FAIL %s: got %0d expected %0d", what, got, exp_v);
    end
  endtask

  // k_used < 0: all K = 2^R*X*kt columns of A / rows of B hold data.
  // k_used >= 0: a ResNet slice; only the first k_used are data, the rest
  // are the zero padding up to the tile size.
  task automatic run(int m, int kt, bit extreme, int k_used = -1);
    int M, K;
    int t0, t_first, t_last_a, t_done, n_a;
    bit seen_a;
    M = P * m;
    K = P * X * kt;
    for (int i = 0; i < M; i++)
      for (int k = 0; k < K; k++)
        am[i][k] = (k_used < 0) ? rnd(extreme) : (k < k_used) ? rnd_act() : 0;
    for (int k = 0; k < K; k++)
      for (int j = 0; j < N; j++)
        bm[k][j] = (k_used < 0) ? rnd(extreme) : (k < k_used) ? rnd_wgt() : 0;
    for (int i = 0; i < M; i++)
      for (int j = 0; j < N; j++) begin
        cm[i][j] = 0;
        for (int k = 0; k < K; k++) cm[i][j] += longint'(am[i][k]) * longint'(bm[k][j]);
      end
    // A word t*m+i: element ((p*P+q)*X+k) = A[p*m+i][t*P*X + q*X + k]
    for (int t = 0; t < kt; t++)
      for (int i = 0; i < m; i++) begin
        @(negedge clk);
        a_wr_en   = 1'b1;
        a_wr_addr = AAW'(t * m + i);
        for (int p = 0; p < P; p++)
          for (int q = 0; q < P; q++)
            for (int k = 0; k < X; k++)
              a_wr_data[(p*P+q)*X+k] = W'(am[p*m+i][t*P*X + q*X + k]);
      end
    // B word t*Y+j: element ((q*P+p)*X+k) = B[t*P*X + p*X + k][q*Y + j]
    for (int t = 0; t < kt; t++)
      for (int j = 0; j < Y; j++) begin
        @(negedge clk);
        a_wr_en   = 1'b0;
        b_wr_en   = 1'b1;
        b_wr_addr = BAW'(t * Y + j);
        for (int p = 0; p < P; p++)
          for (int q = 0; q < P; q++)
            for (int k = 0; k < X; k++)
              b_wr_data[(q*P+p)*X+k] = W'(bm[t*P*X + p*X + k][q*Y + j]);
      end
    @(negedge clk);
    a_wr_en = 1'b0;
    b_wr_en = 1'b0;
    m_rows  = MW'(m);
    k_tiles = KW'(kt);
    start   = 1'b1;
    @(negedge clk);
    start = 1'b0;
    // Watch the A stream until done.
    t0 = 0; seen_a = 0; n_a = 0; t_first = 0; t_last_a = 0;
    while (!done) begin
      if (p_a_rd_en) begin
        if (!seen_a) t_first = t0;
        seen_a = 1;
        t_last_a = t0;
        n_a++;
      end
      @(negedge clk);
      t0++;
    end
    t_done = t0;
    check("A rows issued", n_a, m * kt);
    if (m >= int'(Y)) begin
      // Full rate: one A row per cycle with no gaps, as loads are hidden.
      check("A stream without gaps", t_last_a - t_first + 1, m * kt);
      check("first A read to done", t_done - t_first, m * kt + 1 + int'(LAT));
      n_fullrate_runs++;
    end
    if (kt > 1) n_accum_runs++;
    if (extreme) n_extreme_runs++;
    @(negedge clk);
    check("busy low after done", busy, 0);
    // Read C back: word i, element ((p*P+q)*Y+j) = C[p*m+i][q*Y+j]
    for (int i = 0; i < m; i++) begin
      c_rd_addr = CAW'(i);
      @(negedge clk);
      for (int p = 0; p < P; p++)
        for (int q = 0; q < P; q++)
          for (int j = 0; j < int'(Y); j++)
            check($sformatf("C[%0d][%0d] (m=%0d kt=%0d)", p*m+i, q*Y+j, m, kt),
                  longint'(signed'(c_rd_data[(p*P+q)*Y+j])), cm[p*m+i][q*Y+j]);
    end
  endtask

  // One slice of a layer with reduction length k: k padded to kt tiles, and
  // as many rows per sub-block (m) as the A memory (kt*m words) and the C
  // memory (m words) hold.
  task automatic resnet_slice(int k);
    int kt, m;
    kt = (k + int'(P * X) - 1) / int'(P * X);
    m  = int'(A_DEPTH) / kt;
    if (m > int'(C_DEPTH)) m = C_DEPTH;
    $display("ResNet slice: K=%0d padded to %0d (%0d tiles), %0d output pixels x %0d channels",
             k, kt * int'(P * X), kt, int'(P) * m, N);
    check("slice fits the tile limit", kt <= int'(KT_MAX) && kt * int'(Y) <= int'(B_DEPTH), 1);
    run(m, kt, 0, k);
  endtask

  initial begin
    int kt_max;
    rst_n = 1'b0; a_wr_en = 1'b0; b_wr_en = 1'b0; start = 1'b0;
    a_wr_addr = '0; b_wr_addr = '0; a_wr_data = '0; b_wr_data = '0;
    m_rows = '0; k_tiles = '0; c_rd_addr = '0;
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check("idle after reset", busy, 0);
    if (RESNET) begin
      // conv1 (7x7, 3 input channels): K = 147; 1x1 layer with 64 input
      // channels (conv2_x reduction): K = 64.
      resnet_slice(3 * 7 * 7);
      resnet_slice(64);
      check("accumulating run seen", n_accum_runs > 0, 1);
      check("full-rate run seen", n_fullrate_runs > 0, 1);
    end else begin
      run(Y, 1, 0);                    // smallest full-rate product, n = 2^R * Y
      run(Y, 3, 0);                    // K tiles: hidden B loads and accumulation
      run((Y > 1) ? Y / 2 : 1, 3, 0);  // m < Y: A waits for B
      run(Y + 1, 2, 1);                // extreme operand values
      kt_max = KT_MAX;
      if (kt_max * int'(Y) > int'(B_DEPTH)) kt_max = B_DEPTH / Y;
      if (kt_max * int'(Y) > int'(A_DEPTH)) kt_max = A_DEPTH / Y;
      run(Y, kt_max, 0);               // as many K tiles as the memories hold
      check("stall seen", n_stall > 0, 1);
      check("overlapped B load seen", n_overlap > 0, 1);
      check("accumulating run seen", n_accum_runs > 0, 1);
      check("full-rate run seen", n_fullrate_runs > 0, 1);
      check("extreme-value run seen", n_extreme_runs > 0, 1);
    end
    $display("mechanisms: stall_cycles=%0d overlapped_b_load_cycles=%0d accum_runs=%0d fullrate_runs=%0d extreme_runs=%0d",
             n_stall, n_overlap, n_accum_runs, n_fullrate_runs, n_extreme_runs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
