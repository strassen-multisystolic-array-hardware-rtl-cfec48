// tb_smm_pe -- self-checking testbench for the processing element.
// Random inputs every cycle; a cycle-level reference model of the PE (two b
// banks, registered a/bank/b-stream, registered multiply-accumulate) is kept
// in the testbench and every output is compared after each clock edge.  The
// B stream sometimes targets this PE's row and sometimes another row.
module tb_smm_pe;
  localparam int unsigned AW = 8, CW = 20, DW = 2, ROW = 1;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic signed [AW-1:0] a_in, a_out, b_in, b_out;
  logic a_bank_in, a_bank_out, b_en_in, b_en_out, b_bank_in, b_bank_out;
  logic [DW-1:0] b_dest_in, b_dest_out;
  logic signed [CW-1:0] c_in, c_out;

  smm_pe #(.AW(AW), .CW(CW), .DW(DW), .ROW(ROW)) dut (.*);

  int checks = 0, failures = 0;
  longint m_b [2];
  longint m_a, m_c;
  logic m_abank;
  bit m_bvalid [2];

  task automatic chk(string what, longint got, longint exp_v);
    checks++;
    if (got != exp_v) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %0d exp %0d", what, got, exp_v);
    end
  endtask

  initial begin
    m_bvalid[0] = 0; m_bvalid[1] = 0;
    a_in = '0; a_bank_in = 0; b_in = '0; b_en_in = 0; b_bank_in = 0; b_dest_in = '0; c_in = '0;
    @(negedge clk);
    for (int cyc = 0; cyc < 400; cyc++) begin
      longint a_prev, c_exp;
      logic ab_prev;
      a_in      = AW'($urandom);
      a_bank_in = 1'($urandom);
      b_in      = AW'($urandom);
      b_en_in   = ($urandom_range(0, 2) == 0);
      b_bank_in = 1'($urandom);
      b_dest_in = ($urandom_range(0, 1) != 0) ? DW'(ROW) : DW'($urandom);
      c_in      = CW'($urandom);
      a_prev  = m_a;
      ab_prev = m_abank;
      // reference for the edge that ends this cycle
      c_exp = longint'(c_in) + a_prev * m_b[ab_prev];
      @(posedge clk);
      #1;
      if (cyc > 0 && m_bvalid[ab_prev])
        chk("c_out", c_out, longint'(signed'(CW'(c_exp))));
      chk("a_out", a_out, a_in);
      chk("a_bank_out", a_bank_out, a_bank_in);
      chk("b_out", b_out, b_in);
      chk("b_en_out", b_en_out, b_en_in);
      chk("b_bank_out", b_bank_out, b_bank_in);
      chk("b_dest_out", b_dest_out, b_dest_in);
      if (b_en_in && b_dest_in == DW'(ROW)) begin
        m_b[b_bank_in] = b_in;
        m_bvalid[b_bank_in] = 1;
      end
      m_a = a_in;
      m_abank = a_bank_in;
      @(negedge clk);
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
