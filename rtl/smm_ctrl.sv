// smm_ctrl -- GEMM tile sequencer of the Strassen MXU.
//
// A GEMM is run as K_TILES tile products accumulated outside the MXU.  Tile t
// is an (2^R*m) x (2^R*X) slice of A stored at A addresses t*m .. t*m+m-1 and a
// (2^R*X) x (2^R*Y) slice of B stored at B addresses t*Y .. t*Y+Y-1.  Two
// independent processes run after `start`:
//   * the B loader reads the Y columns of tile t into stationary buffer t%2;
//     it may begin tile t only when A has finished streaming tile t-2 (the
//     previous user of that buffer), so tile t+1 loads while tile t streams;
//   * the A streamer reads the m rows of tile t, one per cycle, tagged with
//     buffer t%2; it may begin tile t only once B tile t is fully loaded, and
//     otherwise stalls.  With m >= Y the loading is entirely hidden and the
//     MXU takes a new A row every cycle.
// Interface: start (pulse, when idle) with m_rows >= 1 and k_tiles >= 1;
// per cycle it issues at most one A read (a_rd_en, with bank, row index and
// first/last-tile flags for the accumulator) and one B read (b_rd_en, bank,
// and b_dest, the array row that B column is written to).
// busy stays high until the last A row has been issued; stall is high in
// cycles where A waits for B.
// Timing: outputs are combinational from the state registers; synchronous
// active-low reset.
//
// Overlapping the B load with the multiplication through the double buffer
// is the paper's; the sequencing rules and counters are this design's.
module smm_ctrl #(
  parameter int unsigned Y       = 6,
  parameter int unsigned A_DEPTH = 256,
  parameter int unsigned B_DEPTH = 64,
  parameter int unsigned M_MAX   = 64,
  parameter int unsigned KT_MAX  = 10,
  localparam int unsigned AAW    = $clog2(A_DEPTH),
  localparam int unsigned BAW    = $clog2(B_DEPTH),
  localparam int unsigned MW     = $clog2(M_MAX + 1),
  localparam int unsigned KW     = $clog2(KT_MAX + 1),
  localparam int unsigned YW     = $clog2(Y + 1),
  localparam int unsigned DW     = (Y > 1) ? $clog2(Y) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [MW-1:0]  m_rows,
  input  logic [KW-1:0]  k_tiles,
  output logic           busy,
  output logic           stall,
  output logic           a_rd_en,
  output logic [AAW-1:0] a_rd_addr,
  output logic           a_bank,
  output logic [MW-1:0]  a_row,
  output logic           a_first,
  output logic           a_last,
  output logic           b_rd_en,
  output logic [BAW-1:0] b_rd_addr,
  output logic           b_bank,
  output logic [DW-1:0]  b_dest
);

  logic [MW-1:0]  m_q;
  logic [KW-1:0]  kt_q;
  logic [KW-1:0]  a_tile, b_tile;
  logic [MW-1:0]  a_row_q;
  logic [YW-1:0]  b_col;
  logic [AAW-1:0] a_addr_q;
  logic [BAW-1:0] b_addr_q;
  logic           running;

  // B tile b_tile may load once A has finished tile b_tile-2.
  assign b_rd_en   = running && (b_tile < kt_q) && (b_tile <= a_tile + 1'b1);
  assign b_rd_addr = b_addr_q;
  assign b_bank    = b_tile[0];
  // Column j of a B tile is stored in row Y-1-j of the lowest-level arrays.
  assign b_dest    = DW'(YW'(Y - 1) - b_col);
  // A tile a_tile may stream once B tile a_tile has been loaded completely.
  assign a_rd_en   = running && (a_tile < kt_q) && (b_tile > a_tile);
  assign stall     = running && (a_tile < kt_q) && !(b_tile > a_tile);
  assign a_rd_addr = a_addr_q;
  assign a_bank    = a_tile[0];
  assign a_row     = a_row_q;
  assign a_first   = (a_tile == '0);
  assign a_last    = (a_tile == kt_q - 1'b1) && (a_row_q == m_q - 1'b1);
  assign busy      = running;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      running  <= 1'b0;
      a_tile   <= '0;
      b_tile   <= '0;
      a_row_q  <= '0;
      b_col    <= '0;
      a_addr_q <= '0;
      b_addr_q <= '0;
      m_q      <= '0;
      kt_q     <= '0;
    end else if (!running) begin
      if (start) begin
        running  <= 1'b1;
        m_q      <= m_rows;
        kt_q     <= k_tiles;
        a_tile   <= '0;
        b_tile   <= '0;
        a_row_q  <= '0;
        b_col    <= '0;
        a_addr_q <= '0;
        b_addr_q <= '0;
      end
    end else begin
      if (b_rd_en) begin
        b_addr_q <= b_addr_q + 1'b1;
        if (b_col == YW'(Y - 1)) begin
          b_col  <= '0;
          b_tile <= b_tile + 1'b1;
        end else begin
          b_col <= b_col + 1'b1;
        end
      end
      if (a_rd_en) begin
        a_addr_q <= a_addr_q + 1'b1;
        if (a_row_q == m_q - 1'b1) begin
          a_row_q <= '0;
          a_tile  <= a_tile + 1'b1;
          if (a_tile == kt_q - 1'b1) running <= 1'b0;
        end else begin
          a_row_q <= a_row_q + 1'b1;
        end
      end
    end
  end

  // A row and the B column it depends on never come from the same tile in
  // the same cycle, and a buffer is never loaded while A still reads it.
  a_after_b: assert property (@(posedge clk) disable iff (!rst_n)
    a_rd_en |-> (b_tile > a_tile));
  b_buffer_free: assert property (@(posedge clk) disable iff (!rst_n)
    b_rd_en |-> (b_tile <= a_tile + 1'b1));

endmodule
