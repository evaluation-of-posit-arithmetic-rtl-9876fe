// gemm_scale: the final step of C = alpha * A*B + beta * C on one row slice
// of DIM elements per cycle. Each lane multiplies the finished dot product
// by alpha and the original C element by beta in two posit_mul units, then
// adds the two in a posit_add. Latency MUL_LAT + ADD_LAT = 11 cycles, one
// slice per cycle, no stalls.
//
// The paper states that the systolic designs compute the full GEMM
// expression with alpha and beta; where and how the scaling is done is not
// described. Doing it once per output element after the last K block, in
// this separate unit, is this design's choice.
module gemm_scale
  import posit_pkg::*;
#(
  parameter int unsigned DIM = 16
) (
  input  logic   clk,
  input  logic   rst_n,
  input  posit_t alpha,
  input  posit_t beta,
  input  logic   in_valid,
  input  posit_t ab_vec [DIM],
  input  posit_t c_vec  [DIM],
  output logic   out_valid,
  output posit_t out_vec [DIM]
);

  logic lane_valid [DIM];

  for (genvar j = 0; j < DIM; j++) begin : g_lane
    posit_t p, q;
    logic   pv, qv;
    posit_mul u_mul_a (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .a(alpha), .b(ab_vec[j]),
                       .out_valid(pv), .result(p));
    posit_mul u_mul_b (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .a(beta), .b(c_vec[j]),
                       .out_valid(qv), .result(q));
    posit_add u_add (.clk(clk), .rst_n(rst_n), .in_valid(pv & qv), .a(p), .b(q),
                     .out_valid(lane_valid[j]), .result(out_vec[j]));
  end

  assign out_valid = lane_valid[0];

endmodule
