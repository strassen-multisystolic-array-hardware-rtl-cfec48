// tb_tri_buf -- self-checking testbench for the triangular skew buffer.
// Random vectors enter every cycle; lane l of the output must equal lane l of
// the input from (l mod G) cycles earlier.
module tb_tri_buf;
  localparam int unsigned DW = 8, LANES = 8, G = 3;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [DW-1:0] d [LANES];
  logic [DW-1:0] q [LANES];

  tri_buf #(.DW(DW), .LANES(LANES), .G(G)) dut (.*);

  int checks = 0, failures = 0;
  logic [DW-1:0] hist [200][LANES];

  initial begin
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      for (int l = 0; l < LANES; l++) begin
        d[l] = DW'($urandom);
        hist[t][l] = d[l];
      end
      #1;
      for (int l = 0; l < LANES; l++) begin
        int dly;
        dly = l % G;
        if (t >= dly) begin
          checks++;
          if (q[l] !== hist[t - dly][l]) begin
            failures++;
            if (failures < 10) $display("FAIL t=%0d lane %0d got %0h exp %0h", t, l, q[l], hist[t-dly][l]);
          end
        end
      end
    end
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
