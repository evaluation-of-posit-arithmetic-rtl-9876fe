// posit_pkg: types and constants shared by the Posit(32,2) arithmetic units
// and the systolic GEMM array.
//
// A Posit(32,2) word holds a sign bit, a run-length encoded regime, two
// exponent bits and a variable-length fraction (value =
// (-1)^s * 16^k * 2^e * 1.f). Inside the units a decoded operand is carried
// in a "two's-complement" internal format: a single signed significand of
// 29 bits (sign, hidden bit, 27 fraction bits) together with a signed scale
// 4k+e. The 29-bit width and the two's-complement choice follow the paper's
// evaluated design; the field layout of the struct is this design's own.
//
// Pipeline depths: the paper states that multiply followed by add takes
// 11 cycles per processing element. How those 11 cycles are split between
// the two units is not given; this design uses 5 for the multiplier and 6
// for the adder.
package posit_pkg;

  localparam int unsigned NBITS = 32;   // total posit width
  localparam int unsigned ES    = 2;    // exponent field width
  localparam int unsigned SIG_W = 29;   // internal two's-complement significand
  localparam int unsigned FRAC_MAX = 27; // largest fraction field (regime of 2 bits)
  localparam int unsigned SCALE_W = 12; // signed scale width, covers +-2*120 and more

  localparam int unsigned MUL_LAT = 5;
  localparam int unsigned ADD_LAT = 6;
  localparam int unsigned PE_LAT  = MUL_LAT + ADD_LAT;  // 11 cycles, from the paper

  // Largest and smallest exponents a Posit(32,2) can represent: 2^(+-120).
  localparam int MAX_EXP = 120;

  typedef logic [NBITS-1:0] posit_t;

  localparam posit_t POSIT_ZERO   = 32'h0000_0000;
  localparam posit_t POSIT_NAR    = 32'h8000_0000;
  localparam posit_t POSIT_ONE    = 32'h4000_0000;
  localparam posit_t POSIT_MAXPOS = 32'h7FFF_FFFF;
  localparam posit_t POSIT_MINPOS = 32'h0000_0001;

  // Decoded operand in the internal format.
  typedef struct packed {
    logic                       nar;    // Not-a-Real
    logic                       zero;   // exact zero
    logic signed [SCALE_W-1:0]  scale;  // 4k + e
    logic signed [SIG_W-1:0]    sig;    // +-1.f, value = sig * 2^(scale-27)
  } posit_int_t;

  // Host port buffer select of the GEMM accelerator.
  typedef enum logic [1:0] {BUF_A = 2'd0, BUF_B = 2'd1, BUF_C = 2'd2} buf_sel_e;

endpackage
