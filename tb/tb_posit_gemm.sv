// tb_posit_gemm: end-to-end test of the GEMM accelerator at its default
// parameters (16 x 16 PEs, 256 x 256 buffers). For each job the host loads
// A, B and C through the host port, starts C = alpha*A*B + beta*C, waits
// for done and reads all of C back; every element must equal the reference
// (products and sums rounded to Posit(32,2) one at a time, k ascending,
// then round(alpha*acc) + round(beta*c)). The number of cycles from start to
// done must match the controller's schedule: per pass DIM load cycles, M
// stream cycles and a drain of 193 cycles (205 on a pass that ends in the
// alpha/beta unit).
//
// Jobs: (1) M=20, N=32, K=48 with random alpha and beta: two column blocks,
// three K blocks, partial sums fed back from the accumulator buffer;
// (2) M=5, N=16, K=16, alpha=1, beta=0: a single pass;
// (3) M=16, N=16, K=32 with operands spread over a wide range (+-2^40).
// Only the ports are used. busy must be high from the cycle after start
// until done; a job that never raises done fails after twice its schedule.
module tb_posit_gemm;
  import posit_pkg::*;
  import posit_ref_pkg::*;

  localparam int DIM = 16;
  localparam int MAXD = 48;

  logic clk = 0;
  always #5 clk = ~clk;
  logic          rst_n = 1;
  logic          host_wr_en = 0, host_rd_en = 0, start = 0;
  buf_sel_e      host_wr_sel = BUF_A;
  logic [15:0]   host_wr_row = 0, host_wr_col = 0, host_rd_row = 0, host_rd_col = 0;
  posit_t        host_wr_data = 0, host_rd_data;
  logic          host_rd_valid, busy, done;
  logic [15:0]   cfg_m = 0, cfg_n = 0, cfg_k = 0;
  posit_t        alpha = POSIT_ONE, beta = POSIT_ZERO;
  int checks = 0, failures = 0, cyc = 0;
  int n_busy = 0;

  posit_gemm dut (.*);

  posit_t Am [MAXD][MAXD];
  posit_t Bm [MAXD][MAXD];
  posit_t Cm [MAXD][MAXD];
  posit_t Em [MAXD][MAXD];

  // Assert the asynchronous reset at the start, so that it takes effect at once.
  initial #1 rst_n = 0;

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (busy) n_busy <= n_busy + 1;
  end

  task automatic host_write(input buf_sel_e sel, input int r, input int c, input posit_t v);
    @(negedge clk);
    host_wr_en = 1; host_wr_sel = sel; host_wr_row = 16'(r); host_wr_col = 16'(c); host_wr_data = v;
    @(negedge clk);
    host_wr_en = 0;
  endtask

  task automatic run_job(input int m, input int n, input int k, input posit_t al,
                         input posit_t be, input int range);
    int t0, t1, b0, expect_cycles, passes;
    for (int i = 0; i < m; i++) for (int j = 0; j < k; j++) Am[i][j] = rand_posit(range);
    for (int i = 0; i < k; i++) for (int j = 0; j < n; j++) Bm[i][j] = rand_posit(range);
    for (int i = 0; i < m; i++) for (int j = 0; j < n; j++) Cm[i][j] = rand_posit(range);
    // reference
    for (int i = 0; i < m; i++) for (int j = 0; j < n; j++) begin
      posit_t acc = POSIT_ZERO;
      for (int q = 0; q < k; q++) acc = ref_add(ref_mul(Am[i][q], Bm[q][j]), acc);
      Em[i][j] = ref_add(ref_mul(al, acc), ref_mul(be, Cm[i][j]));
    end
    for (int i = 0; i < m; i++) for (int j = 0; j < k; j++) host_write(BUF_A, i, j, Am[i][j]);
    for (int i = 0; i < k; i++) for (int j = 0; j < n; j++) host_write(BUF_B, i, j, Bm[i][j]);
    for (int i = 0; i < m; i++) for (int j = 0; j < n; j++) host_write(BUF_C, i, j, Cm[i][j]);
    @(negedge clk);
    cfg_m = 16'(m); cfg_n = 16'(n); cfg_k = 16'(k); alpha = al; beta = be;
    // schedule: every pass loads, streams and drains
    passes = (n / DIM) * (k / DIM);
    expect_cycles = passes * (DIM + m + 193) + (n / DIM) * 12 + 1;
    start = 1;
    t0 = cyc;
    b0 = n_busy;
    @(negedge clk);
    start = 0;
    while (!done && cyc - t0 < 2 * expect_cycles) @(negedge clk);
    t1 = cyc;
    checks++;
    if (!done) begin
      failures++;
      $display("FAIL job %0dx%0dx%0d: no done after %0d cycles", m, n, k, t1 - t0);
    end else if (t1 - t0 != expect_cycles) begin
      failures++;
      $display("FAIL job %0dx%0dx%0d took %0d cycles, schedule says %0d", m, n, k, t1 - t0, expect_cycles);
    end
    // busy is high from the cycle after start until done rises
    checks++;
    if (n_busy - b0 != t1 - t0 - 1 || busy) begin
      failures++;
      $display("FAIL busy high for %0d of %0d job cycles", n_busy - b0, t1 - t0);
    end
    // read back C
    for (int i = 0; i < m; i++) for (int j = 0; j < n; j++) begin
      @(negedge clk);
      host_rd_en = 1; host_rd_row = 16'(i); host_rd_col = 16'(j);
      @(negedge clk);
      host_rd_en = 0;
      checks++;
      if (!host_rd_valid || host_rd_data != Em[i][j]) begin
        failures++;
        if (failures < 10)
          $display("FAIL C[%0d][%0d] = %h expected %h (%f)", i, j, host_rd_data, Em[i][j], ref_to_real(Em[i][j]));
      end
    end
    $display("job M=%0d N=%0d K=%0d: %0d cycles", m, n, k, t1 - t0);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_job(20, 32, 48, rand_posit(1), rand_posit(1), 4);
    run_job(5, 16, 16, POSIT_ONE, POSIT_ZERO, 4);
    run_job(16, 16, 32, rand_posit(2), rand_posit(2), 40);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
