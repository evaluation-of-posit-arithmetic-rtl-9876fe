// systolic_array: ROWS x COLS mesh of posit_pe for GEMM, 16 x 16 = 256 PEs
// by default as in the paper's largest configuration.
//
// Data flow (B-stationary): PE(k,j) holds B[k][j] of the current 16x16
// block of B. Each cycle one row i of the current A block enters,
// a_vec[k] = A[i][k], together with the 16 partial sums psum_vec[j] of row i
// of C (zero on the first K block). Along row k the A element moves right
// one PE per cycle; down column j the partial sum picks up A[i][k]*B[k][j]
// in every PE, 11 cycles per PE. The inputs are skewed so that operand and
// partial sum meet: row k's A input is delayed by 11*k cycles and column
// j's partial-sum input by j cycles. The sums leaving the bottom are
// de-skewed (column j delayed by COLS-1-j) so that out_vec holds a whole row
// of C in one cycle. Latency from in_valid to out_valid is
// ROWS*PE_LAT + COLS - 1 = 191 cycles at the defaults; one row per cycle is
// accepted continuously, for 256 multiply-adds per cycle.
//
// Weights: while w_shift is high, w_vec[j] is shifted into the top of column
// j and each column shifts down by one; after ROWS shifts row k holds the
// value that was pushed ROWS-1-k shifts before the last.
//
// The mesh of multiply-add PEs and the 16 x 16 size are the paper's; the
// stationary operand, the skew buffers and the weight chain are this
// design's own arrangement.
module systolic_array
  import posit_pkg::*;
#(
  parameter int unsigned ROWS = 16,
  parameter int unsigned COLS = 16
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  posit_t a_vec    [ROWS],
  input  posit_t psum_vec [COLS],
  input  posit_t w_vec    [COLS],
  input  logic   w_shift,
  output logic   out_valid,
  output posit_t out_vec  [COLS]
);

  posit_t a_h  [ROWS][COLS+1];
  logic   av_h [ROWS][COLS+1];
  posit_t p_v  [ROWS+1][COLS];
  logic   pv_v [ROWS+1][COLS];
  posit_t w_v  [ROWS+1][COLS];
  logic   ov   [COLS];

  for (genvar k = 0; k < ROWS; k++) begin : g_askew
    delay_line  #(.W(NBITS), .D(PE_LAT * k)) u_dl (.clk(clk), .din(a_vec[k]), .dout(a_h[k][0]));
    valid_delay #(.D(PE_LAT * k)) u_vd (.clk(clk), .rst_n(rst_n), .din(in_valid), .dout(av_h[k][0]));
  end

  for (genvar j = 0; j < COLS; j++) begin : g_col_io
    delay_line  #(.W(NBITS), .D(j)) u_dl_in (.clk(clk), .din(psum_vec[j]), .dout(p_v[0][j]));
    valid_delay #(.D(j)) u_vd_in (.clk(clk), .rst_n(rst_n), .din(in_valid), .dout(pv_v[0][j]));
    assign w_v[0][j] = w_vec[j];
    delay_line  #(.W(NBITS), .D(COLS - 1 - j)) u_dl_out (.clk(clk), .din(p_v[ROWS][j]), .dout(out_vec[j]));
    valid_delay #(.D(COLS - 1 - j)) u_vd_out (.clk(clk), .rst_n(rst_n), .din(pv_v[ROWS][j]), .dout(ov[j]));
  end

  for (genvar k = 0; k < ROWS; k++) begin : g_row
    for (genvar j = 0; j < COLS; j++) begin : g_pe
      posit_pe u_pe (
        .clk(clk), .rst_n(rst_n),
        .a_in(a_h[k][j]), .a_valid_in(av_h[k][j]),
        .a_out(a_h[k][j+1]), .a_valid_out(av_h[k][j+1]),
        .w_in(w_v[k][j]), .w_shift(w_shift), .w_out(w_v[k+1][j]),
        .psum_in(p_v[k][j]), .psum_valid_in(pv_v[k][j]),
        .psum_out(p_v[k+1][j]), .psum_valid_out(pv_v[k+1][j])
      );
    end
  end

  assign out_valid = ov[0];

  // After de-skew every column delivers its element of the same row.
  for (genvar j = 1; j < COLS; j++) begin : g_chk
    cols_in_step: assert property (@(posedge clk) disable iff (!rst_n) ov[j] == ov[0])
      else $error("systolic_array: column %0d out of step", j);
  end

endmodule
