// tb_systolic_array: checks the 16 x 16 array at its default size. A random
// 16x16 block of B is shifted into the PEs, then M rows of A, each with a
// row of incoming partial sums, are streamed one per cycle. Row i of the
// output must equal, column by column, the reference result of adding
// round(A[i][k] * B[k][j]) to the partial sum for k = 0..15 in order, and
// must leave the array exactly ROWS*11 + COLS-1 = 191 cycles after it went
// in. Two blocks are run, the second with a new B and a gap in the input
// stream.
module tb_systolic_array;
  import posit_pkg::*;
  import posit_ref_pkg::*;

  localparam int R = 16, C = 16, M = 24;
  localparam int LAT = R * int'(PE_LAT) + C - 1;

  logic clk = 0;
  always #5 clk = ~clk;
  logic   rst_n = 1;
  logic   in_valid = 0, w_shift = 0;
  posit_t a_vec [R];
  posit_t psum_vec [C];
  posit_t w_vec [C];
  logic   out_valid;
  posit_t out_vec [C];
  int checks = 0, failures = 0, cyc = 0;

  systolic_array dut (.*);

  posit_t Bm [R][C];
  posit_t exp_mem [2*M][C];
  int     exp_t [2*M];
  int     wr_ptr = 0, rd_ptr = 0;

  // Assert the asynchronous reset at the start, so that it takes effect at once.
  initial #1 rst_n = 0;

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) begin
    if (out_valid) begin
      if (rd_ptr == wr_ptr) begin
        failures++;
        if (failures < 5) $display("FAIL unexpected output row at %0d", cyc);
      end else begin
        checks++;
        if (cyc - exp_t[rd_ptr] != LAT) begin
          failures++;
          $display("FAIL latency %0d expected %0d", cyc - exp_t[rd_ptr], LAT);
        end
        for (int j = 0; j < C; j++) begin
          checks++;
          if (out_vec[j] != exp_mem[rd_ptr][j]) begin
            failures++;
            if (failures < 10) $display("FAIL col %0d got %h expected %h", j, out_vec[j], exp_mem[rd_ptr][j]);
          end
        end
        rd_ptr++;
      end
    end
  end

  task automatic load_b();
    for (int k = 0; k < R; k++) for (int j = 0; j < C; j++) Bm[k][j] = rand_posit(4);
    for (int s = 0; s < R; s++) begin
      @(negedge clk);
      for (int j = 0; j < C; j++) w_vec[j] = Bm[R-1-s][j];
      w_shift = 1;
    end
    @(negedge clk);
    w_shift = 0;
  endtask

  task automatic stream(input int rows, input bit gaps);
    for (int i = 0; i < rows; i++) begin
      @(negedge clk);
      if (gaps && i == rows / 2) begin
        in_valid = 0;
        @(negedge clk);
      end
      for (int k = 0; k < R; k++) a_vec[k] = rand_posit(4);
      for (int j = 0; j < C; j++) psum_vec[j] = (i % 3 == 0) ? POSIT_ZERO : rand_posit(4);
      for (int j = 0; j < C; j++) begin
        posit_t acc = psum_vec[j];
        for (int k = 0; k < R; k++) acc = ref_add(ref_mul(a_vec[k], Bm[k][j]), acc);
        exp_mem[wr_ptr][j] = acc;
      end
      exp_t[wr_ptr] = cyc;
      wr_ptr++;
      in_valid = 1;
    end
    @(negedge clk);
    in_valid = 0;
  endtask

  initial begin
    for (int j = 0; j < C; j++) begin w_vec[j] = '0; psum_vec[j] = '0; end
    for (int k = 0; k < R; k++) a_vec[k] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_b();
    stream(M, 0);
    repeat (LAT + 5) @(negedge clk);
    load_b();
    stream(M, 1);
    repeat (LAT + 5) @(negedge clk);
    if (rd_ptr != 2 * M) begin
      failures++;
      $display("FAIL %0d rows missing", 2 * M - rd_ptr);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
