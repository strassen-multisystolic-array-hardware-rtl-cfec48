// tb_smm_top_resnet -- smm_top at its default parameters (two Strassen levels
// over 6 x 6 arrays, 16-bit operands) running slices of ResNet convolution
// layers: 8-bit quantized activations and weights, K zero-padded to whole
// tiles.  The stimulus and the checks are in smm_top_driver (RESNET = 1).
module tb_smm_top_resnet;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, a_wr_en, b_wr_en, start, busy, done, stall;
  logic [7:0] a_wr_addr;
  logic [5:0] b_wr_addr, c_rd_addr;
  logic [16*6-1:0][15:0] a_wr_data, b_wr_data;
  logic [6:0] m_rows;
  logic [3:0] k_tiles;
  logic [16*6-1:0][42:0] c_rd_data;

  smm_top dut (.*);

  smm_top_driver #(
    .W(16), .R(2), .X(6), .Y(6), .QE(1'b0),
    .A_DEPTH(256), .B_DEPTH(64), .C_DEPTH(64), .KT_MAX(10), .ACC_W(43),
    .RESNET(1'b1)
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
