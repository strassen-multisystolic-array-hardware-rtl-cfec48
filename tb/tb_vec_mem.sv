// tb_vec_mem -- self-checking testbench for the vector memory.
// Random writes and reads interleave; a reference array predicts every read,
// which must appear one cycle after the request and must hold while rd_en is
// low.
module tb_vec_mem;
  localparam int unsigned DW = 40, DEPTH = 16;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic wr_en, rd_en;
  logic [3:0] wr_addr, rd_addr;
  logic [DW-1:0] wr_data, rd_data;

  vec_mem #(.DW(DW), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  logic [DW-1:0] ref_mem [DEPTH];
  logic [DW-1:0] exp_q;

  initial begin
    wr_en = 0; rd_en = 0; wr_addr = '0; rd_addr = '0; wr_data = '0;
    // fill every word first so that all reads are defined
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 4'(i); wr_data = {$urandom, $urandom};
      ref_mem[i] = wr_data;
    end
    @(negedge clk);
    wr_en = 0; rd_en = 1; rd_addr = '0;
    @(posedge clk); #1;
    exp_q = ref_mem[0];
    for (int cyc = 0; cyc < 300; cyc++) begin
      @(negedge clk);
      checks++;
      if (rd_data !== exp_q) begin
        failures++;
        if (failures < 10) $display("FAIL cyc %0d got %0h exp %0h", cyc, rd_data, exp_q);
      end
      wr_en = ($urandom_range(0, 1) != 0);
      wr_addr = 4'($urandom);
      wr_data = {$urandom, $urandom};
      rd_en = ($urandom_range(0, 2) != 0);
      rd_addr = 4'($urandom);
      // a read of the address being written returns the old word
      if (rd_en) exp_q = ref_mem[rd_addr];
      @(posedge clk);
      if (wr_en) ref_mem[wr_addr] = wr_data;
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
