// posit_pe: one processing element of the systolic GEMM array: a Posit(32,2)
// multiply followed by a Posit(32,2) add, PE_LAT = 11 cycles in all.
//
// Each PE keeps one element of B (the weight w). An element of A arrives
// from the left together with a partial sum from above. The PE forms
// a * w in the multiplier (MUL_LAT cycles) while the partial sum waits in a
// matching delay line, then adds the two (ADD_LAT cycles) and passes the new
// partial sum to the PE below. The A element is passed on to the PE on the
// right after one register. A partial sum therefore takes 11 cycles to cross
// a PE and 16 x 11 = 176 cycles to cross a column of 16 PEs, as the paper
// states.
//
// Weights are loaded by shifting them down the column: while w_shift is
// high, w takes w_in from the PE above and w_out feeds the PE below. The
// weight must not change while products that use it are in flight; the
// controller only loads weights when the array is empty.
//
// Following the paper: multiply-then-add per PE and the 11-cycle total. This
// design's choice: the B-stationary data flow with partial sums moving down
// the columns, the weight shift chain and the valid flags.
module posit_pe
  import posit_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  // A operand, flowing left to right
  input  posit_t a_in,
  input  logic   a_valid_in,
  output posit_t a_out,
  output logic   a_valid_out,
  // stationary weight, shifted in from above
  input  posit_t w_in,
  input  logic   w_shift,
  output posit_t w_out,
  // partial sum, flowing top to bottom
  input  posit_t psum_in,
  input  logic   psum_valid_in,
  output posit_t psum_out,
  output logic   psum_valid_out
);

  posit_t w;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       w <= POSIT_ZERO;
    else if (w_shift) w <= w_in;
  end
  assign w_out = w;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) a_valid_out <= 1'b0;
    else        a_valid_out <= a_valid_in;
  end
  always_ff @(posedge clk) a_out <= a_in;

  posit_t prod;
  logic   prod_valid;
  posit_mul u_mul (
    .clk(clk), .rst_n(rst_n), .in_valid(a_valid_in), .a(a_in), .b(w),
    .out_valid(prod_valid), .result(prod)
  );

  posit_t psum_d;
  logic   psum_valid_d;
  delay_line  #(.W(NBITS), .D(MUL_LAT)) u_psum_dl (.clk(clk), .din(psum_in), .dout(psum_d));
  valid_delay #(.D(MUL_LAT)) u_psum_vd (.clk(clk), .rst_n(rst_n), .din(psum_valid_in), .dout(psum_valid_d));

  posit_add u_add (
    .clk(clk), .rst_n(rst_n), .in_valid(prod_valid), .a(prod), .b(psum_d),
    .out_valid(psum_valid_out), .result(psum_out)
  );

  // The A operand and the partial sum it belongs to must arrive together.
  a_psum_aligned: assert property (@(posedge clk) disable iff (!rst_n)
                                   prod_valid == psum_valid_d)
    else $error("posit_pe: A operand and partial sum out of step");

endmodule
