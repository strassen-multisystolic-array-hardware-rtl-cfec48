// tb_smm_mxu -- self-checking testbench for the recursive Strassen MXU.
//
// Builds two random GEMM tiles (A: 2^R*M_SUB x 2^R*X, B: 2^R*X x 2^R*Y),
// loads B tile 0 into buffer 0, then streams A tile 0 while B tile 1 is
// shifted into buffer 1 (double buffering), then streams A tile 1.  Inputs are
// skewed here (lane k delayed k cycles) and every C element is compared, at
// the cycle the latency formula predicts, with a product computed by plain
// triple loops.  Runs with R = 2 (the default recursion depth) at small
// array sizes and narrow words, plus the Q-addition pipeline option.
module tb_smm_mxu;
  import smm_pkg::*;

  localparam int unsigned R     = 2;
  localparam int unsigned W     = 6;
  localparam int unsigned X     = 3;
  localparam int unsigned Y     = 2;
  localparam bit          QE    = 1'b1;
  localparam int unsigned M_SUB = 4;                 // rows per A sub-block (>= Y)
  localparam int unsigned P     = 2**R;
  localparam int unsigned NS    = 4**R;
  localparam int unsigned CWD   = cw(W, R, X);
  localparam int unsigned LAT   = R * (2 + QE) + X + Y;  // lane 0 -> c[j] is LAT - j
  localparam int unsigned NSTEP = Y + 2 * M_SUB;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic signed [W-1:0]   a      [NS*X];
  logic                  a_bank [X];
  logic signed [W-1:0]   b      [NS*X];
  logic                  b_en   [X];
  logic                  b_bank [X];
  logic [$clog2(Y)-1:0]  b_dest [X];
  logic signed [CWD-1:0] c      [NS*Y];

  smm_mxu #(.R(R), .W(W), .X(X), .Y(Y), .CW(CWD), .Q_EXTRA_REGS(QE)) dut (.*);

  int am [2][P*M_SUB][P*X];
  int bm [2][P*X][P*Y];
  longint cm [2][P*M_SUB][P*Y];
  int checks = 0, failures = 0;

  // Tile and row/column of each schedule step: steps 0..Y-1 load B0,
  // steps Y..Y+M_SUB-1 stream A0 and (first Y of them) load B1,
  // steps Y+M_SUB.. stream A1.
  function automatic int a_tile(int st); return (st < Y + M_SUB) ? 0 : 1; endfunction
  function automatic bit is_a(int st); return st >= Y && st < NSTEP; endfunction
  function automatic int a_row(int st); return (st - Y) % M_SUB; endfunction
  function automatic bit is_b(int st); return st >= 0 && st < 2 * Y; endfunction

  task automatic drive(int t);
    for (int k = 0; k < X; k++) begin
      int st;
      st = t - k;
      a_bank[k] = 1'b0; b_en[k] = 1'b0; b_bank[k] = 1'b0; b_dest[k] = '0;
      for (int p = 0; p < P; p++)
        for (int q = 0; q < P; q++) begin
          int s = qt_index(p, q, R);
          a[s*X+k] = '0; b[s*X+k] = '0;
          if (is_a(st)) a[s*X+k] = W'(am[a_tile(st)][p*M_SUB + a_row(st)][q*X+k]);
          if (is_b(st)) b[s*X+k] = W'(bm[st / Y][p*X+k][q*Y + st % Y]);
        end
      if (is_a(st)) a_bank[k] = a_tile(st) != 0;
      if (is_b(st)) begin
        b_en[k] = 1'b1; b_bank[k] = (st / Y) != 0; b_dest[k] = $clog2(Y)'(Y - 1 - st % Y);
      end
    end
  endtask

  int t;
  initial begin
    for (int n = 0; n < 2; n++) begin
      foreach (am[n][i, k]) am[n][i][k] = int'($urandom_range(0, 2**W - 1)) - 2**(W-1);
      foreach (bm[n][k, j]) bm[n][k][j] = int'($urandom_range(0, 2**W - 1)) - 2**(W-1);
      foreach (cm[n][i, j]) begin
        cm[n][i][j] = 0;
        for (int k = 0; k < P*X; k++) cm[n][i][j] += longint'(am[n][i][k]) * bm[n][k][j];
      end
    end
    t = -1;
    drive(t);
    for (t = 0; t < NSTEP + LAT + X + 2; t++) begin
      drive(t);
      @(posedge clk);
      #1;
      // After the edge ending cycle t, outputs belong to cycle t+1.
      for (int j = 0; j < Y; j++) begin
        int st;
        st = t + 1 - int'(LAT - j);
        if (is_a(st))
          for (int p = 0; p < P; p++)
            for (int q = 0; q < P; q++) begin
              logic signed [CWD-1:0] exp_v;
              exp_v = CWD'(cm[a_tile(st)][p*M_SUB + a_row(st)][q*Y+j]);
              checks++;
              if (c[qt_index(p, q, R)*Y+j] !== exp_v) begin
                failures++;
                if (failures < 10)
                  $display("mismatch step %0d blk(%0d,%0d) col %0d: got %0d exp %0d",
                           st, p, q, j, c[qt_index(p, q, R)*Y+j], exp_v);
              end
            end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
