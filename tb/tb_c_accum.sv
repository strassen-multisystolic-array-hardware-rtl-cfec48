// tb_c_accum -- self-checking testbench for the tile-product accumulator.
// Random rows are written with and without the first-tile flag (including
// back-to-back updates of one address); a reference array of sums predicts
// every read-back, which arrives one cycle after its address.
module tb_c_accum;
  localparam int unsigned NL = 3, CW = 8, ACC_W = 12, DEPTH = 4;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic in_valid, in_first;
  logic [1:0] in_addr, rd_addr;
  logic signed [CW-1:0] in_c [NL];
  logic signed [ACC_W-1:0] rd_data [NL];

  c_accum #(.NL(NL), .CW(CW), .ACC_W(ACC_W), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  longint ref_acc [DEPTH][NL];

  initial begin
    in_valid = 0; in_first = 0; in_addr = '0; rd_addr = '0;
    foreach (in_c[l]) in_c[l] = '0;
    // initialise every row with a first-tile write
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      in_valid = 1; in_first = 1; in_addr = 2'(i);
      foreach (in_c[l]) begin
        in_c[l] = CW'($urandom);
        ref_acc[i][l] = longint'(in_c[l]);
      end
    end
    for (int cyc = 0; cyc < 400; cyc++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      in_first = ($urandom_range(0, 5) == 0);
      in_addr  = ($urandom_range(0, 2) == 0) ? in_addr : 2'($urandom);
      foreach (in_c[l]) in_c[l] = CW'($urandom);
      rd_addr = 2'($urandom);
      @(posedge clk);
      // check the read of the pre-edge contents
      #1;
      for (int l = 0; l < NL; l++) begin
        logic signed [ACC_W-1:0] e;
        e = ACC_W'(ref_acc[rd_addr][l]);
        checks++;
        if (rd_data[l] !== e) begin
          failures++;
          if (failures < 10) $display("FAIL row %0d lane %0d got %0d exp %0d", rd_addr, l, rd_data[l], e);
        end
      end
      if (in_valid)
        for (int l = 0; l < NL; l++)
          ref_acc[in_addr][l] = (in_first ? 0 : ref_acc[in_addr][l]) + longint'(in_c[l]);
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
