// tb_a_add_vec -- self-checking testbench for the A addition vectors.
// Random quadrant slices (including the extremes of the signed range) are
// applied every cycle; one cycle later each T_x element is compared with
// Strassen's T equations evaluated on integers.
module tb_a_add_vec;
  localparam int unsigned W = 8, L = 5;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic signed [W-1:0] a [4*L];
  logic signed [W:0]   t [7*L];

  a_add_vec #(.W(W), .L(L)) dut (.*);

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
          a[qd*L+e] = W'(q[qd][e]);
        end
      @(posedge clk);
      #1;
      for (int e = 0; e < L; e++) begin
        // quadrants: 0 = A11, 1 = A12, 2 = A21, 3 = A22
        e7[0] = q[0][e] + q[3][e];
        e7[1] = q[2][e] + q[3][e];
        e7[2] = q[0][e];
        e7[3] = q[3][e];
        e7[4] = q[0][e] + q[1][e];
        e7[5] = q[2][e] - q[0][e];
        e7[6] = q[1][e] - q[3][e];
        for (int x = 0; x < 7; x++) begin
          checks++;
          if (int'(t[x*L+e]) != e7[x]) begin
            failures++;
            if (failures < 10) $display("FAIL T%0d[%0d] got %0d exp %0d", x+1, e, t[x*L+e], e7[x]);
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
