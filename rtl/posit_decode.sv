// posit_decode: the pre-processing step of every Posit(32,2) operation.
//
// Combinational. The word is first made positive (two's complement of the
// whole word when the sign is set). A priority encoder then finds the length
// of the regime run: consecutive 1s terminated by a 0 give k = run-1,
// consecutive 0s terminated by a 1 give k = -run. The bits after the regime
// and its terminator are the two exponent bits and the fraction, which is
// 32 - run - 2 - 1 bits long (27 bits at most). The output is the internal
// format of posit_pkg: scale = 4k+e and a 29-bit two's-complement
// significand, the hidden 1 and fraction negated when the word is negative.
//
// The run-length decoding with a priority encoder is the paper's; the
// internal record layout is this design's.
module posit_decode
  import posit_pkg::*;
(
  input  posit_t     p,
  output posit_int_t d
);

  logic [NBITS-1:0] mag;
  logic [30:0]      body;
  logic             rbit;
  logic [5:0]       run;
  logic [63:0]      shifted;
  logic signed [7:0] k;
  logic [1:0]       e;
  logic [FRAC_MAX:0] m;   // 1.f, 28 bits

  always_comb begin
    mag  = p[NBITS-1] ? (~p + 1'b1) : p;
    body = mag[30:0];
    rbit = body[30];
    // Priority encoder: the highest bit that differs from the first regime
    // bit ends the run. With no such bit the run fills all 31 bits.
    run = 6'd31;
    for (int i = 0; i <= 30; i++) begin
      if (body[i] != rbit) run = 6'(30 - i);
    end
    k = rbit ? ($signed({2'b0, run}) - 8'sd1) : -$signed({2'b0, run});
    // Drop regime and terminator: exponent lands in [63:62], fraction below.
    shifted = {body, 33'b0} << (run + 6'd1);
    e = shifted[63:62];
    m = {1'b1, shifted[61:35]};

    d.nar   = (p == POSIT_NAR);
    d.zero  = (p == POSIT_ZERO);
    d.scale = SCALE_W'($signed({k, e}));  // 4k + e
    d.sig   = p[NBITS-1] ? -$signed({1'b0, m}) : $signed({1'b0, m});
    if (d.zero || d.nar) begin
      d.scale = '0;
      d.sig   = '0;
    end
  end

endmodule
