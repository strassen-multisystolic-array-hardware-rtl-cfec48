// tb_q_add_vec -- self-checking testbench for the Q addition vectors.
// Two instances, without and with the extra pipeline registers, receive the
// same random Q1..Q7 stream; each C quadrant is compared, 1 or 2 cycles
// later, with Strassen's C equations evaluated on integers and reduced
// modulo 2^CW (the unit's wrap-around arithmetic).
module tb_q_add_vec;
  localparam int unsigned CW = 10, L = 4;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic signed [CW-1:0] q  [7*L];
  logic signed [CW-1:0] c0 [4*L];
  logic signed [CW-1:0] c1 [4*L];

  q_add_vec #(.CW(CW), .L(L), .EXTRA_REGS(1'b0)) dut0 (.clk, .q, .c(c0));
  q_add_vec #(.CW(CW), .L(L), .EXTRA_REGS(1'b1)) dut1 (.clk, .q, .c(c1));

  int checks = 0, failures = 0;
  longint hist [0:2][4][L];  // expected C for the last inputs, hist[d] = d cycles ago

  task automatic chk(string what, longint got, longint exp_v);
    logic signed [CW-1:0] e;
    e = CW'(exp_v);
    checks++;
    if (got != longint'(e)) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %0d exp %0d", what, got, e);
    end
  endtask

  initial begin
    longint qq [7][L];
    for (int cyc = 0; cyc < 300; cyc++) begin
      @(negedge clk);
      for (int x = 0; x < 7; x++)
        for (int e = 0; e < L; e++) begin
          qq[x][e] = longint'(int'($urandom_range(0, 2**CW - 1)) - 2**(CW-1));
          q[x*L+e] = CW'(qq[x][e]);
        end
      hist[2] = hist[1];
      hist[1] = hist[0];
      for (int e = 0; e < L; e++) begin
        hist[0][0][e] = qq[0][e] + qq[3][e] - qq[4][e] + qq[6][e];
        hist[0][1][e] = qq[2][e] + qq[4][e];
        hist[0][2][e] = qq[1][e] + qq[3][e];
        hist[0][3][e] = qq[0][e] - qq[1][e] + qq[2][e] + qq[5][e];
      end
      @(posedge clk);
      #1;
      for (int d = 0; d < 4; d++)
        for (int e = 0; e < L; e++) begin
          chk($sformatf("no-extra C%0d[%0d]", d, e), c0[d*L+e], hist[0][d][e]);
          if (cyc > 0) chk($sformatf("extra C%0d[%0d]", d, e), c1[d*L+e], hist[1][d][e]);
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
