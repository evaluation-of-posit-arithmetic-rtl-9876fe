// posit_encode: the post-processing step of every Posit(32,2) operation.
//
// Takes an unnormalised result in two's-complement form, value =
// sig * 2^(scale - FP), plus a sticky bit meaning "the true value is a little
// above sig" (bits lost in an alignment shift), and produces the rounded
// Posit(32,2) word. Two pipeline stages, 2 cycles of latency:
//   stage A  turns the two's-complement result into sign and magnitude,
//            finds the leading one (leading-zero count) and derives the
//            binary exponent E and the left-justified fraction;
//   stage B  writes the regime for k = floor(E/4) (k+1 ones and a 0, or -k
//            zeros and a 1), the two exponent bits and the fraction into a
//            bit string, keeps its first 31 bits and rounds to nearest,
//            ties to even, on that string. Results beyond the range saturate
//            to maxpos/minpos; a posit never rounds to zero or NaR.
// When the magnitude is taken of a negative value with sticky set, the
// integer part is ~sig rather than -sig, since -(sig + d) = ~sig + (1 - d).
// Precondition: sticky may be set only when the magnitude has at least 29
// significant bits above its LSB, so that the rounding point always lies
// above the lost bits. The adder guarantees this (its sticky bit only arises
// after an alignment shift, when the sum keeps 58 or more bits).
//
// That the encoder places the exponent into the regime and rounds with the
// new fraction length follows the paper; the string-based rounding, the
// pipeline split and the saturation rules (those of the posit standard)
// are this design's.
module posit_encode
  import posit_pkg::*;
#(
  parameter int unsigned W  = 62,   // width of the signed input significand
  parameter int unsigned FP = 59    // binary point: value = sig * 2^(scale-FP)
) (
  input  logic                       clk,
  input  logic signed [W-1:0]        sig,
  input  logic                       sticky,
  input  logic signed [SCALE_W-1:0]  scale,
  input  logic                       zero,
  input  logic                       nar,
  output posit_t                     result
);

  localparam int unsigned LW = $clog2(W);

  // ---- stage A: magnitude, leading one, exponent ----
  logic [W-1:0]              mag_a;
  logic [LW-1:0]             lead_a;
  logic [W-1:0]              frac_a;
  logic signed [SCALE_W-1:0] exp_a;
  logic                      zero_a;

  always_comb begin
    if (sig[W-1]) mag_a = sticky ? ~sig : -sig;
    else          mag_a = sig;
    lead_a = '0;
    for (int i = 0; i < W; i++) begin
      if (mag_a[i]) lead_a = LW'(i);
    end
    // Left-justify the bits below the leading one.
    frac_a = mag_a << (W - 32'(lead_a));
    exp_a  = scale + SCALE_W'(lead_a) - SCALE_W'(FP);
    zero_a = zero || (mag_a == '0 && !sticky);
  end

  logic                      neg_b, zero_b, nar_b, sticky_b;
  logic signed [SCALE_W-1:0] exp_b;
  logic [W-1:0]              frac_b;

  always_ff @(posedge clk) begin
    neg_b    <= sig[W-1];
    zero_b   <= zero_a;
    nar_b    <= nar;
    sticky_b <= sticky;
    exp_b    <= exp_a;
    frac_b   <= frac_a;
  end

  // ---- stage B: regime, string, rounding ----
  logic signed [SCALE_W-1:0] k_b;
  logic [1:0]                e_b;
  logic [5:0]                rl_b;     // regime length incl. terminator
  logic [127:0]              str_b;
  logic [30:0]               body_b;
  logic                      guard_b, st_b;
  posit_t                    res_b;

  always_comb begin
    k_b = exp_b >>> 2;
    e_b = exp_b[1:0];
    str_b = '0;
    rl_b  = '0;
    body_b = '0;
    guard_b = 1'b0;
    st_b = 1'b0;
    if (exp_b >= SCALE_W'(MAX_EXP)) begin
      body_b = POSIT_MAXPOS[30:0];
    end else if (exp_b < -SCALE_W'(MAX_EXP)) begin
      body_b = POSIT_MINPOS[30:0];
    end else begin
      if (k_b >= 0) begin
        str_b = ~128'h0 << (7'd127 - 7'(k_b));         // k+1 ones, then the 0
        rl_b  = 6'(k_b + 2);
      end else begin
        str_b = 128'h1 << (7'd127 + 7'(k_b));          // -k zeros, then the 1
        rl_b  = 6'(1 - k_b);
      end
      str_b = str_b | ({e_b, frac_b, {(126 - W){1'b0}}} >> rl_b);
      body_b  = str_b[127:97];
      guard_b = str_b[96];
      st_b    = (|str_b[95:0]) | sticky_b;
      body_b  = body_b + {30'b0, guard_b & (st_b | body_b[0])};
    end
    if (nar_b)       res_b = POSIT_NAR;
    else if (zero_b) res_b = POSIT_ZERO;
    else if (neg_b)  res_b = -{1'b0, body_b};
    else             res_b = {1'b0, body_b};
  end

  always_ff @(posedge clk) result <= res_b;

endmodule
