// posit_add: pipelined Posit(32,2) adder, two's-complement internal format,
// ADD_LAT = 6 cycles, one result per cycle.
//
//   cycle 1  both operands decoded (posit_decode) and registered
//   cycle 2  the operand with the larger scale is chosen as the reference;
//            the shift distance is the scale difference (saturated at 63).
//            A zero operand is replaced by a zero significand so that the
//            other operand passes through exactly.
//   cycle 3  both significands are widened by 32 guard bits; the smaller
//            one is shifted right arithmetically, the bits shifted out are
//            ORed into a sticky bit
//   cycle 4  the two signed values are added (62 bits). With two's
//            complement significands there is no magnitude compare and no
//            effective-subtraction path: one adder serves both signs.
//   cycles 5-6  posit_encode
// NaR in either operand gives NaR. in_valid is carried as out_valid.
//
// A pipelined adder with a two's-complement internal format is what the
// paper evaluates; the stage split, guard width and 6-cycle depth are this
// design's.
module posit_add
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

  localparam int unsigned GUARD = 32;
  localparam int unsigned AW = SIG_W + GUARD + 1;   // 62 bits

  posit_int_t da, db;
  posit_decode u_dec_a (.p(a), .d(da));
  posit_decode u_dec_b (.p(b), .d(db));

  // cycle 1
  posit_int_t da1, db1;
  always_ff @(posedge clk) begin
    da1 <= da;
    db1 <= db;
  end

  // cycle 2: choose the reference operand
  logic signed [SIG_W-1:0]   big2, small2;
  logic signed [SCALE_W-1:0] scale2;
  logic [5:0]                dist2;
  logic                      zero2, nar2;
  always_ff @(posedge clk) begin
    logic signed [SCALE_W-1:0] diff;
    nar2  <= da1.nar | db1.nar;
    zero2 <= da1.zero & db1.zero;
    if (db1.zero || (!da1.zero && da1.scale >= db1.scale)) begin
      big2   <= da1.sig;
      small2 <= db1.sig;
      scale2 <= da1.scale;
      diff    = da1.scale - db1.scale;
    end else begin
      big2   <= db1.sig;
      small2 <= da1.sig;
      scale2 <= db1.scale;
      diff    = db1.scale - da1.scale;
    end
    if (da1.zero || db1.zero) diff = '0;   // small2 is 0 then
    dist2 <= (diff > 63) ? 6'd63 : 6'(diff);
  end

  // cycle 3: align
  logic signed [AW-1:0]      x3, y3;
  logic                      sticky3;
  logic signed [SCALE_W-1:0] scale3;
  logic                      zero3, nar3;
  always_ff @(posedge clk) begin
    logic signed [63:0] yw;
    logic [63:0]        mask;
    yw   = 64'(small2) <<< GUARD;
    mask = (64'h1 << dist2) - 64'h1;
    x3      <= AW'(big2) <<< GUARD;
    y3      <= AW'(yw >>> dist2);
    sticky3 <= |(yw & mask);
    scale3  <= scale2;
    zero3   <= zero2;
    nar3    <= nar2;
  end

  // cycle 4: add
  logic signed [AW-1:0]      sum4;
  logic                      sticky4;
  logic signed [SCALE_W-1:0] scale4;
  logic                      zero4, nar4;
  always_ff @(posedge clk) begin
    sum4    <= x3 + y3;
    sticky4 <= sticky3;
    scale4  <= scale3;
    zero4   <= zero3;
    nar4    <= nar3;
  end

  // cycles 5-6: value = sum * 2^(scale - 59)
  posit_encode #(.W(AW), .FP(FRAC_MAX + GUARD)) u_enc (
    .clk(clk), .sig(sum4), .sticky(sticky4), .scale(scale4),
    .zero(zero4), .nar(nar4), .result(result)
  );

  logic [ADD_LAT-1:0] vpipe;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[ADD_LAT-2:0], in_valid};
  end
  assign out_valid = vpipe[ADD_LAT-1];

endmodule
