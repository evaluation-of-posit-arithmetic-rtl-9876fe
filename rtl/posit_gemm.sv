// posit_gemm: Posit(32,2) GEMM accelerator, C = alpha * A * B + beta * C,
// without transposes (a host transposes operands beforehand if needed).
//
// Blocks: on-chip buffers for A (M x K), B (K x N), C (M x N) and for the
// running partial sums (ACC, M x N), each split into DIM banks by column so
// that a DIM-wide row slice moves in one cycle; a DIM x DIM systolic array
// of multiply-add PEs (systolic_array); the alpha/beta unit (gemm_scale);
// and the controller below. A host loads A, B and C word by word through
// the host port, sets M, N, K, alpha and beta, pulses start, waits for done
// and reads C back through the same port.
//
// Controller: the product is computed one DIM-column block of C (index nb)
// and one DIM-row block of K (index kb) at a time, kb innermost. Each pass:
//   LOAD    DIM cycles: rows kb*DIM+DIM-1 down to kb*DIM of B, columns of
//           block nb, are read and shifted into the array's PEs;
//   STREAM  M cycles: row i of A (columns of block kb) and row i of ACC
//           (zero when kb = 0) enter the array, one row per cycle;
//   DRAIN   the controller waits until every row has left the array and
//           been written back: to ACC while more K blocks follow, otherwise
//           through gemm_scale (with the original C) into C.
// Weights are only reloaded when the array is empty, so a pass costs about
// DIM + M + 191 (+12 on the last K block) cycles; with small M or K the
// pipeline latency of the PEs dominates, which is the low utilisation for
// thin trailing-matrix updates that the paper reports.
//
// Order of rounding: C[i][j] = round(alpha*acc) + round(beta*C) where acc
// adds the products A[i][k]*B[k][j] one at a time in increasing k, each
// product and each sum rounded to Posit(32,2).
//
// Restrictions (assertions): N and K multiples of DIM; 1 <= M <= MAX_M;
// N <= MAX_N; K <= MAX_K; the host port is used only while busy is low.
//
// From the paper: the GEMM interface with alpha and beta, no transposes,
// the 16 x 16 array of multiply-add PEs, 11 cycles per PE. This design's
// own: buffer sizes (the paper's board streams from DDR4 memory that is not
// part of this RTL), the host port, the blocking order and the controller.
module posit_gemm
  import posit_pkg::*;
#(
  parameter int unsigned DIM   = 16,
  parameter int unsigned MAX_M = 256,
  parameter int unsigned MAX_N = 256,
  parameter int unsigned MAX_K = 256,
  localparam int unsigned DW   = 16          // width of dimension fields
) (
  input  logic          clk,
  input  logic          rst_n,
  // host port
  input  logic          host_wr_en,
  input  buf_sel_e      host_wr_sel,
  input  logic [DW-1:0] host_wr_row,
  input  logic [DW-1:0] host_wr_col,
  input  posit_t        host_wr_data,
  input  logic          host_rd_en,
  input  logic [DW-1:0] host_rd_row,
  input  logic [DW-1:0] host_rd_col,
  output posit_t        host_rd_data,
  output logic          host_rd_valid,
  // job
  input  logic [DW-1:0] cfg_m,
  input  logic [DW-1:0] cfg_n,
  input  logic [DW-1:0] cfg_k,
  input  posit_t        alpha,
  input  posit_t        beta,
  input  logic          start,
  output logic          busy,
  output logic          done
);

  localparam int unsigned KB   = MAX_K / DIM;      // K blocks
  localparam int unsigned NB   = MAX_N / DIM;      // N blocks
  localparam int unsigned DA   = MAX_M * KB;       // A bank depth
  localparam int unsigned DB   = MAX_K * NB;       // B bank depth
  localparam int unsigned DC   = MAX_M * NB;       // C and ACC bank depth
  localparam int unsigned AWA  = $clog2(DA);
  localparam int unsigned AWB  = $clog2(DB);
  localparam int unsigned AWC  = $clog2(DC);
  localparam int unsigned LD   = $clog2(DIM);
  localparam int unsigned CW   = 20;               // row/pass counters

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_STREAM, S_DRAIN, S_DONE} state_e;
  state_e state;

  // ---------------- buffers ----------------
  logic           a_we, a_re;
  logic [AWA-1:0] a_waddr, a_raddr;
  logic [LD-1:0]  a_wbank;
  posit_t         a_rdata [DIM];

  logic           b_we, b_re;
  logic [AWB-1:0] b_waddr, b_raddr;
  logic [LD-1:0]  b_wbank;
  posit_t         b_rdata [DIM];

  logic           c_re;
  logic [AWC-1:0] c_raddr;
  logic           c_we    [DIM];
  logic [AWC-1:0] c_waddr [DIM];
  posit_t         c_wdata [DIM];
  posit_t         c_rdata [DIM];

  logic           acc_we, acc_re;
  logic [AWC-1:0] acc_waddr, acc_raddr;
  posit_t         acc_wdata [DIM];
  posit_t         acc_rdata [DIM];

  for (genvar j = 0; j < DIM; j++) begin : g_bank
    bank_ram #(.W(NBITS), .DEPTH(DA)) u_a (
      .clk(clk), .we(a_we && a_wbank == LD'(j)), .waddr(a_waddr), .wdata(host_wr_data),
      .re(a_re), .raddr(a_raddr), .rdata(a_rdata[j]));
    bank_ram #(.W(NBITS), .DEPTH(DB)) u_b (
      .clk(clk), .we(b_we && b_wbank == LD'(j)), .waddr(b_waddr), .wdata(host_wr_data),
      .re(b_re), .raddr(b_raddr), .rdata(b_rdata[j]));
    bank_ram #(.W(NBITS), .DEPTH(DC)) u_c (
      .clk(clk), .we(c_we[j]), .waddr(c_waddr[j]), .wdata(c_wdata[j]),
      .re(c_re), .raddr(c_raddr), .rdata(c_rdata[j]));
    bank_ram #(.W(NBITS), .DEPTH(DC)) u_acc (
      .clk(clk), .we(acc_we), .waddr(acc_waddr), .wdata(acc_wdata[j]),
      .re(acc_re), .raddr(acc_raddr), .rdata(acc_rdata[j]));
  end

  // ---------------- job registers ----------------
  logic [DW-1:0] m_r, nblk_r, kblk_r;
  posit_t        alpha_r, beta_r;
  logic [DW-1:0] nb, kb;
  logic [CW-1:0] cnt;
  logic          last_k;
  logic [CW-1:0] outstanding;
  logic          issue_row, retire_row;
  logic          w_shift, issue_d, first_k_d;

  assign last_k = (kb == kblk_r - 1'b1);
  assign busy   = (state != S_IDLE) && (state != S_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      m_r     <= '0;
      nblk_r  <= '0;
      kblk_r  <= '0;
      alpha_r <= POSIT_ONE;
      beta_r  <= POSIT_ZERO;
      nb      <= '0;
      kb      <= '0;
      cnt     <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE, S_DONE: begin
          state <= S_IDLE;
          if (start) begin
            m_r     <= cfg_m;
            nblk_r  <= cfg_n >> LD;
            kblk_r  <= cfg_k >> LD;
            alpha_r <= alpha;
            beta_r  <= beta;
            nb      <= '0;
            kb      <= '0;
            cnt     <= '0;
            state   <= S_LOAD;
          end
        end
        S_LOAD: begin
          cnt <= cnt + 1'b1;
          if (cnt == CW'(DIM - 1)) begin
            cnt   <= '0;
            state <= S_STREAM;
          end
        end
        S_STREAM: begin
          cnt <= cnt + 1'b1;
          if (cnt == CW'(m_r) - 1'b1) begin
            cnt   <= '0;
            state <= S_DRAIN;
          end
        end
        S_DRAIN: begin
          if (outstanding == '0 && !issue_d) begin
            if (!last_k) begin
              kb    <= kb + 1'b1;
              state <= S_LOAD;
            end else if (nb != nblk_r - 1'b1) begin
              kb    <= '0;
              nb    <= nb + 1'b1;
              state <= S_LOAD;
            end else begin
              state <= S_DONE;
              done  <= 1'b1;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------- feed side ----------------
  // B reads during LOAD: row kb*DIM + DIM-1-cnt, block nb.
  assign b_re    = (state == S_LOAD);
  assign b_raddr = AWB'((32'(kb) * DIM + (DIM - 1) - 32'(cnt)) * NB + 32'(nb));
  // A and ACC reads during STREAM: row cnt.
  assign issue_row = (state == S_STREAM);
  assign a_re      = issue_row;
  assign a_raddr   = AWA'(32'(cnt) * KB + 32'(kb));
  assign acc_re    = issue_row;
  assign acc_raddr = AWC'(32'(cnt) * NB + 32'(nb));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_shift   <= 1'b0;
      issue_d   <= 1'b0;
      first_k_d <= 1'b0;
    end else begin
      w_shift   <= b_re;
      issue_d   <= issue_row;
      first_k_d <= (kb == '0);
    end
  end

  posit_t psum_vec [DIM];
  for (genvar j = 0; j < DIM; j++) begin : g_psum
    assign psum_vec[j] = first_k_d ? POSIT_ZERO : acc_rdata[j];
  end

  logic   arr_valid;
  posit_t arr_out [DIM];
  systolic_array #(.ROWS(DIM), .COLS(DIM)) u_array (
    .clk(clk), .rst_n(rst_n),
    .in_valid(issue_d), .a_vec(a_rdata), .psum_vec(psum_vec),
    .w_vec(b_rdata), .w_shift(w_shift),
    .out_valid(arr_valid), .out_vec(arr_out)
  );

  // ---------------- drain side ----------------
  logic [CW-1:0] out_row, scale_row;
  logic          to_acc, to_scale;
  assign to_acc   = arr_valid && !last_k;
  assign to_scale = arr_valid && last_k;

  assign acc_we    = to_acc;
  assign acc_waddr = AWC'(32'(out_row) * NB + 32'(nb));
  for (genvar j = 0; j < DIM; j++) begin : g_accw
    assign acc_wdata[j] = arr_out[j];
  end

  // Original C is read for the row leaving the array; the sums wait a cycle.
  logic   scale_in_valid;
  posit_t ab_d [DIM];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) scale_in_valid <= 1'b0;
    else        scale_in_valid <= to_scale;
  end
  always_ff @(posedge clk) ab_d <= arr_out;

  logic   scale_valid;
  posit_t scale_out [DIM];
  gemm_scale #(.DIM(DIM)) u_scale (
    .clk(clk), .rst_n(rst_n), .alpha(alpha_r), .beta(beta_r),
    .in_valid(scale_in_valid), .ab_vec(ab_d), .c_vec(c_rdata),
    .out_valid(scale_valid), .out_vec(scale_out)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_row   <= '0;
      scale_row <= '0;
    end else if (state == S_LOAD) begin
      out_row   <= '0;
      scale_row <= '0;
    end else begin
      if (arr_valid)   out_row   <= out_row + 1'b1;
      if (scale_valid) scale_row <= scale_row + 1'b1;
    end
  end

  assign retire_row = to_acc || scale_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) outstanding <= '0;
    else        outstanding <= outstanding + CW'(issue_row) - CW'(retire_row);
  end

  // ---------------- host port and C port sharing ----------------
  logic [LD-1:0]  host_wbank, host_rbank, host_rbank_d;
  assign host_wbank = host_wr_col[LD-1:0];
  assign host_rbank = host_rd_col[LD-1:0];

  assign a_we    = host_wr_en && host_wr_sel == BUF_A;
  assign a_wbank = host_wbank;
  assign a_waddr = AWA'(32'(host_wr_row) * KB + 32'(host_wr_col >> LD));
  assign b_we    = host_wr_en && host_wr_sel == BUF_B;
  assign b_wbank = host_wbank;
  assign b_waddr = AWB'(32'(host_wr_row) * NB + 32'(host_wr_col >> LD));

  assign c_re    = busy ? to_scale : host_rd_en;
  assign c_raddr = busy ? AWC'(32'(out_row) * NB + 32'(nb))
                        : AWC'(32'(host_rd_row) * NB + 32'(host_rd_col >> LD));

  for (genvar j = 0; j < DIM; j++) begin : g_cw
    always_comb begin
      if (busy) begin
        c_we[j]    = scale_valid;
        c_waddr[j] = AWC'(32'(scale_row) * NB + 32'(nb));
        c_wdata[j] = scale_out[j];
      end else begin
        c_we[j]    = host_wr_en && host_wr_sel == BUF_C && host_wbank == LD'(j);
        c_waddr[j] = AWC'(32'(host_wr_row) * NB + 32'(host_wr_col >> LD));
        c_wdata[j] = host_wr_data;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      host_rd_valid <= 1'b0;
      host_rbank_d  <= '0;
    end else begin
      host_rd_valid <= host_rd_en && !busy;
      host_rbank_d  <= host_rbank;
    end
  end
  assign host_rd_data = c_rdata[host_rbank_d];

  // ---------------- rules ----------------
  job_shape: assert property (@(posedge clk) disable iff (!rst_n)
      start && !busy |-> (32'(cfg_n) % DIM == 0) && (32'(cfg_k) % DIM == 0) && cfg_n != 0 && cfg_k != 0
                         && cfg_m != 0 && 32'(cfg_m) <= MAX_M && 32'(cfg_n) <= MAX_N && 32'(cfg_k) <= MAX_K)
    else $error("posit_gemm: unsupported job shape");
  host_idle: assert property (@(posedge clk) disable iff (!rst_n)
      busy |-> !host_wr_en && !host_rd_en)
    else $error("posit_gemm: host port used while busy");
  row_order: assert property (@(posedge clk) disable iff (!rst_n)
      outstanding <= CW'(MAX_M))
    else $error("posit_gemm: row accounting broken");

endmodule
