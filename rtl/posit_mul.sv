// posit_mul: pipelined Posit(32,2) multiplier, two's-complement internal
// format, MUL_LAT = 5 cycles, one result per cycle.
//
//   cycle 1  both operands decoded (posit_decode) and registered
//   cycle 2  the signed 29x29 product is formed as two partial products,
//            a * b[13:0] (unsigned low half) and a * b[28:14] (signed high
//            half), as a DSP-block multiplier would be split
//   cycle 3  partial products summed to the exact 58-bit signed product;
//            scale = scale_a + scale_b
//   cycles 4-5  posit_encode (normalise, regime, round to nearest even)
// Because the significands are signed, no separate sign logic is needed:
// the product's sign is the sign of the two's-complement product.
// NaR in either operand gives NaR, otherwise a zero operand gives zero.
// in_valid is carried alongside as out_valid; the unit never stalls.
//
// A pipelined multiplier with a two's-complement internal format is what the
// paper evaluates; the stage split and the 5-cycle depth (of the 11 cycles
// per PE) are this design's.
module posit_mul
  import posit_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  posit_t a,
  input  posit_t b,
  output logic   out_valid,
  output posit_t result
);

  localparam int unsigned PW = 2 * SIG_W;   // 58-bit product

  posit_int_t da, db;
  posit_decode u_dec_a (.p(a), .d(da));
  posit_decode u_dec_b (.p(b), .d(db));

  // cycle 1
  posit_int_t da1, db1;
  always_ff @(posedge clk) begin
    da1 <= da;
    db1 <= db;
  end

  // cycle 2: partial products
  logic signed [SIG_W+15-1:0]    pp_lo2;  // a * unsigned 14-bit low half
  logic signed [SIG_W+15-1:0]    pp_hi2;  // a * signed 15-bit high half
  logic signed [SCALE_W-1:0]     scale2;
  logic                          zero2, nar2;
  always_ff @(posedge clk) begin
    pp_lo2 <= da1.sig * $signed({1'b0, db1.sig[13:0]});
    pp_hi2 <= da1.sig * $signed(db1.sig[SIG_W-1:14]);
    scale2 <= da1.scale + db1.scale;
    zero2  <= da1.zero | db1.zero;
    nar2   <= da1.nar | db1.nar;
  end

  // cycle 3: exact product
  logic signed [PW-1:0]          prod3;
  logic signed [SCALE_W-1:0]     scale3;
  logic                          zero3, nar3;
  always_ff @(posedge clk) begin
    prod3  <= (PW'(pp_hi2) <<< 14) + PW'(pp_lo2);
    scale3 <= scale2;
    zero3  <= zero2;
    nar3   <= nar2;
  end

  // cycles 4-5: value = prod * 2^(scale - 54)
  posit_encode #(.W(PW), .FP(2 * FRAC_MAX)) u_enc (
    .clk(clk), .sig(prod3), .sticky(1'b0), .scale(scale3),
    .zero(zero3), .nar(nar3), .result(result)
  );

  logic [MUL_LAT-1:0] vpipe;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[MUL_LAT-2:0], in_valid};
  end
  assign out_valid = vpipe[MUL_LAT-1];

endmodule
