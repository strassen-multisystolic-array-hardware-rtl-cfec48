// vec_mem -- vector-wide on-chip memory used for the A and B operand buffers.
//
// One word is one full MXU input vector: for A, row i of every lowest-level
// sub-block of a GEMM tile (address i holds rows i, i+m, i+2m, ... of the
// tile, concatenated); for B, column j of every sub-block.  With this layout
// the MXU reads everything it needs for one cycle from a single address.
//
// Interface: one write port (host side) and one read port.  Timing: the read
// data is registered, valid the cycle after rd_en/rd_addr (block-RAM style).
// No reset; contents are undefined until written.
//
// The layout is the paper's; the memory organisation (one word per vector,
// simple dual port, 1-cycle read) is this design's choice.
module vec_mem #(
  parameter int unsigned DW    = 1536,
  parameter int unsigned DEPTH = 256,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [DW-1:0] wr_data,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic [DW-1:0] rd_data
);

  logic [DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
