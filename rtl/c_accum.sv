// c_accum -- accumulator for partial GEMM tile products.
//
// The MXU returns one C row per cycle (row i of all lowest-level C
// sub-blocks, i.e. in the same layout as an A memory word).  A GEMM with
// several K tiles produces one partial product per tile; they are summed
// here, outside the MXU: the row from the first K tile overwrites the stored
// row, later tiles add to it.  The sums are kept ACC_W bits wide
// (sign-extended from the CW-bit MXU output).
//
// Interface: in_valid, in_first, in_addr (the row index i) and in_c; a host
// read port rd_addr -> rd_data.
// Timing: read-modify-write in one cycle (register-file style storage, so
// the same row can be updated in consecutive cycles); rd_data registered, 1
// cycle.
//
// That partial tile products are accumulated outside the MXU is the paper's;
// this storage organisation is this design's choice.
module c_accum #(
  parameter int unsigned NL    = 96,
  parameter int unsigned CW    = 39,
  parameter int unsigned ACC_W = 47,
  parameter int unsigned DEPTH = 64,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                    clk,
  input  logic                    in_valid,
  input  logic                    in_first,
  input  logic [AW-1:0]           in_addr,
  input  logic signed [CW-1:0]    in_c    [NL],
  input  logic [AW-1:0]           rd_addr,
  output logic signed [ACC_W-1:0] rd_data [NL]
);

  logic signed [ACC_W-1:0] acc [DEPTH][NL];

  always_ff @(posedge clk) begin
    if (in_valid)
      for (int unsigned l = 0; l < NL; l++)
        acc[in_addr][l] <= (in_first ? ACC_W'(0) : acc[in_addr][l]) + ACC_W'(in_c[l]);
    rd_data <= acc[rd_addr];
  end

endmodule
