// smm_pe -- processing element of the lowest-level (MM_0) systolic array.
//
// Weight-stationary MAC cell.  An A element enters from above, is registered
// and passed on to the PE below one cycle later, together with a bank bit that
// says which of the two stationary B registers it must be multiplied with.
// The product is added to the partial sum arriving from the PE on the left and
// the sum is registered and sent to the PE on the right.
//
// B is double-buffered, as the paper describes, so that the next B tile can be
// loaded while the current one is in use.  B elements also travel down the
// column, one row per cycle, with a write enable, a bank bit and the index of
// the row they are meant for; the PE whose ROW matches stores the element in
// the named bank.  Because the load moves down the column at the same speed
// as A, a bank is never overwritten before the last A row that uses it has
// passed, and a new tile's first A row never overtakes its B load.
//
// Timing: a_out/a_bank_out, the B pass-through outputs and c_out are all
// registered (1 cycle).
//
// From the paper (its PE figure): registered a, double b register with a load
// control, b passing down the column, multiplier, adder and a registered
// partial sum of 2w + w_a bits.  The bank bit carried with A and the row
// index carried with B are this design's choice.
module smm_pe #(
  parameter int unsigned AW  = 18,  // multiplier input width (w + r)
  parameter int unsigned CW  = 39,  // partial-sum width (2(w + r) + w_a)
  parameter int unsigned DW  = 3,   // width of the B destination-row index
  parameter int unsigned ROW = 0    // this PE's row in its array
) (
  input  logic                 clk,
  input  logic signed [AW-1:0] a_in,
  input  logic                 a_bank_in,
  output logic signed [AW-1:0] a_out,
  output logic                 a_bank_out,
  input  logic signed [AW-1:0] b_in,
  input  logic                 b_en_in,
  input  logic                 b_bank_in,
  input  logic [DW-1:0]        b_dest_in,
  output logic signed [AW-1:0] b_out,
  output logic                 b_en_out,
  output logic                 b_bank_out,
  output logic [DW-1:0]        b_dest_out,
  input  logic signed [CW-1:0] c_in,
  output logic signed [CW-1:0] c_out
);

  logic signed [AW-1:0] b_q [2];
  logic signed [CW-1:0] prod;

  always_ff @(posedge clk) begin
    a_out      <= a_in;
    a_bank_out <= a_bank_in;
    b_out      <= b_in;
    b_en_out   <= b_en_in;
    b_bank_out <= b_bank_in;
    b_dest_out <= b_dest_in;
    if (b_en_in && b_dest_in == DW'(ROW)) b_q[b_bank_in] <= b_in;
  end

  assign prod = CW'(a_out * b_q[a_bank_out]);

  always_ff @(posedge clk) c_out <= c_in + prod;

endmodule
