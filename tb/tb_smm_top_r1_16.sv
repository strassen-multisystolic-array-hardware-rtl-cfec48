// tb_smm_top_r1_16 -- end-to-end test of smm_top configured as SMM_1 16x16 (one Strassen level, 16-bit).
// Same runs and checks as the default-configuration test (see
// smm_top_driver): smallest full-rate product, hidden B loads with
// accumulation over K tiles, stalls with short A tiles, extreme operands.
module tb_smm_top_r1_16;
  localparam int unsigned W = 16, R = 1, X = 16, Y = 16;
  localparam bit          QE = 1'b0;
  localparam int unsigned NS = 4**R;
  localparam int unsigned A_DEPTH = 256, B_DEPTH = 64, C_DEPTH = 64, KT_MAX = 10;
  localparam int unsigned ACC_W = 2 * (W + R) + $clog2(X) + $clog2(KT_MAX + 1);

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, a_wr_en, b_wr_en, start, busy, done, stall;
  logic [$clog2(A_DEPTH)-1:0] a_wr_addr;
  logic [$clog2(B_DEPTH)-1:0] b_wr_addr;
  logic [$clog2(C_DEPTH)-1:0] c_rd_addr;
  logic [NS*X-1:0][W-1:0] a_wr_data, b_wr_data;
  logic [$clog2(C_DEPTH+1)-1:0] m_rows;
  logic [$clog2(KT_MAX+1)-1:0] k_tiles;
  logic [NS*Y-1:0][ACC_W-1:0] c_rd_data;

  smm_top #(.W(W), .R(R), .X(X), .Y(Y), .Q_EXTRA_REGS(QE)) dut (.*);

  smm_top_driver #(
    .W(W), .R(R), .X(X), .Y(Y), .QE(QE),
    .A_DEPTH(A_DEPTH), .B_DEPTH(B_DEPTH), .C_DEPTH(C_DEPTH), .KT_MAX(KT_MAX), .ACC_W(ACC_W)
  ) u_drv (
    .*,
    .p_a_rd_en(dut.a_rd_en),
    .p_b_rd_en(dut.b_rd_en),
    .p_stall  (stall)
  );

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", u_drv.checks, u_drv.failures + 1);
    $finish;
  end
endmodule
