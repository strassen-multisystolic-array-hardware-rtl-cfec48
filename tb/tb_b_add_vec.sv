// tb_b_add_vec -- self-checking testbench for the B addition vectors.
// Random quadrant slices (including the extremes of the signed range) are
// applied every cycle; one cycle later each S_x element is compared with
// Strassen's S equations evaluated on integers.
module tb_b_add_vec;
  localparam int unsigned W = 8, L = 5;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic signed [W-1:0] b [4*L];
  logic signed [W:0]   s [7*L];

  b_add_vec #(.W(W), .L(L)) dut (.*);

  int checks = 0, failures = 0;
  int q [4][L];
  int e7 [7];

  function automatic int rv();
    case ($urandom_range(0, 3))
      0: return -(2**(W-1));
      1: return 2**(W-1) - 1;
      default: return int'($urandom_range(0, 2**W - 1)) - 2**(W-1);
    endcase
  endfunction

  initial begin
    for (int cyc = 0; cyc < 200; cyc++) begin
      @(negedge clk);
      for (int qd = 0; qd < 4; qd++)
        for (int e = 0; e < L; e++) begin
          q[qd][e] = rv();
          b[qd*L+e] = W'(q[qd][e]);
        end
      @(posedge clk);
      #1;
      for (int e = 0; e < L; e++) begin
        // quadrants: 0 = B11, 1 = B12, 2 = B21, 3 = B22
        e7[0] = q[0][e] + q[3][e];
        e7[1] = q[0][e];
        e7[2] = q[1][e] - q[3][e];
        e7[3] = q[2][e] - q[0][e];
        e7[4] = q[3][e];
        e7[5] = q[0][e] + q[1][e];
        e7[6] = q[2][e] + q[3][e];
        for (int x = 0; x < 7; x++) begin
          checks++;
          if (int'(s[x*L+e]) != e7[x]) begin
            failures++;
            if (failures < 10) $display("FAIL S%0d[%0d] got %0d exp %0d", x+1, e, s[x*L+e], e7[x]);
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
