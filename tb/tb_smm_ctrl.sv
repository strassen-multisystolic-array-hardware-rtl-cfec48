// tb_smm_ctrl -- self-checking testbench for the GEMM tile sequencer.
// For several (m, k_tiles) commands it watches every cycle and checks:
//   * A and B read addresses run through 0..m*kt-1 and 0..Y*kt-1 in order,
//     with the right buffer bank, row index, first/last flags and B
//     destination row (Y-1-j for column j);
//   * A tile t is read only after all Y columns of B tile t;
//   * B tile u is read only after A tile u-2 has been read completely;
//   * neither stream idles when its rule allows it to go (so the schedule is
//     the fastest the rules allow), stall is high exactly when A waits;
//   * with m >= Y the whole command takes Y + m*kt cycles (B loads hidden).
module tb_smm_ctrl;
  localparam int unsigned Y = 3, A_DEPTH = 64, B_DEPTH = 32, M_MAX = 16, KT_MAX = 6;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, start, busy, stall;
  logic [4:0] m_rows;
  logic [2:0] k_tiles;
  logic a_rd_en, a_bank, a_first, a_last, b_rd_en, b_bank;
  logic [5:0] a_rd_addr;
  logic [4:0] a_row;
  logic [4:0] b_rd_addr;
  logic [1:0] b_dest;

  smm_ctrl #(.Y(Y), .A_DEPTH(A_DEPTH), .B_DEPTH(B_DEPTH), .M_MAX(M_MAX), .KT_MAX(KT_MAX)) dut (.*);

  int checks = 0, failures = 0, n_stall = 0;

  task automatic chk(string what, longint got, longint exp_v);
    checks++;
    if (got != exp_v) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %0d exp %0d", what, got, exp_v);
    end
  endtask

  task automatic run(int m, int kt);
    int na, nb, cyc;
    @(negedge clk);
    m_rows = 5'(m); k_tiles = 3'(kt); start = 1;
    @(negedge clk);
    start = 0;
    na = 0; nb = 0; cyc = 0;
    while (busy) begin
      int at, bu;
      bit a_may, b_may;
      at = na / m;
      bu = nb / Y;
      a_may = (na < m * kt) && (nb >= (at + 1) * int'(Y));
      b_may = (nb < int'(Y) * kt) && (na >= (bu - 1) * m);
      chk("A issues when allowed", a_rd_en, a_may);
      chk("B issues when allowed", b_rd_en, b_may);
      chk("stall flag", stall, (na < m * kt) && !a_may);
      if (stall) n_stall++;
      if (a_rd_en) begin
        chk("A addr", a_rd_addr, na);
        chk("A row", a_row, na % m);
        chk("A bank", a_bank, at % 2);
        chk("A first", a_first, at == 0);
        chk("A last", a_last, na == m * kt - 1);
        na++;
      end
      if (b_rd_en) begin
        chk("B addr", b_rd_addr, nb);
        chk("B bank", b_bank, bu % 2);
        chk("B dest", b_dest, int'(Y) - 1 - nb % int'(Y));
        nb++;
      end
      @(negedge clk);
      cyc++;
    end
    chk("A rows", na, m * kt);
    chk("B columns", nb, int'(Y) * kt);
    if (m >= int'(Y)) chk("cycles at full rate", cyc, int'(Y) + m * kt);
  endtask

  initial begin
    rst_n = 0; start = 0; m_rows = '0; k_tiles = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(3, 4);
    run(1, 3);
    run(5, 2);
    run(2, 5);
    run(4, 1);
    run(7, 6);
    chk("stalls seen", n_stall > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
