// tb_gemm_scale: checks the alpha/beta unit. Rows of DIM = 16 dot products
// and original C values are streamed with random gaps and changing alpha
// and beta (including alpha = 1, beta = 0 and beta = -1); each output lane
// must equal round(round(alpha*ab) + round(beta*c)) from the reference and
// appear exactly MUL_LAT + ADD_LAT = 11 cycles after its inputs.
module tb_gemm_scale;
  import posit_pkg::*;
  import posit_ref_pkg::*;

  localparam int DIM = 16, N = 400;
  logic clk = 0;
  always #5 clk = ~clk;
  logic   rst_n = 1, in_valid = 0;
  posit_t alpha = POSIT_ONE, beta = POSIT_ZERO;
  posit_t ab_vec [DIM];
  posit_t c_vec [DIM];
  logic   out_valid;
  posit_t out_vec [DIM];
  int checks = 0, failures = 0, cyc = 0;
  posit_t exp_mem [N][DIM];
  int     exp_t [N];
  int     wr_ptr = 0, rd_ptr = 0;

  gemm_scale dut (.*);

  // Assert the asynchronous reset at the start, so that it takes effect at once.
  initial #1 rst_n = 0;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) begin
    if (out_valid) begin
      checks++;
      if (rd_ptr == wr_ptr || cyc - exp_t[rd_ptr] != int'(MUL_LAT + ADD_LAT)) begin
        failures++;
        $display("FAIL output row %0d at wrong time", rd_ptr);
      end
      for (int j = 0; j < DIM; j++) begin
        checks++;
        if (out_vec[j] != exp_mem[rd_ptr][j]) begin
          failures++;
          if (failures < 10) $display("FAIL lane %0d got %h expected %h", j, out_vec[j], exp_mem[rd_ptr][j]);
        end
      end
      rd_ptr++;
    end
  end

  initial begin
    for (int j = 0; j < DIM; j++) begin ab_vec[j] = '0; c_vec[j] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < N; r++) begin
      @(negedge clk);
      if (r % 100 == 0) begin
        in_valid = 0;
        repeat (MUL_LAT + ADD_LAT + 1) @(negedge clk);   // idle pipeline, then new scalars
        case (r / 100)
          0: begin alpha = POSIT_ONE; beta = POSIT_ZERO; end
          1: begin alpha = rand_posit(3); beta = rand_posit(3); end
          2: begin alpha = rand_posit(3); beta = 32'hC000_0000; end   // beta = -1
          default: begin alpha = rand_posit(20); beta = rand_posit(20); end
        endcase
      end
      for (int j = 0; j < DIM; j++) begin
        ab_vec[j] = rand_posit(6);
        c_vec[j]  = rand_posit(6);
        exp_mem[wr_ptr][j] = ref_add(ref_mul(alpha, ab_vec[j]), ref_mul(beta, c_vec[j]));
      end
      exp_t[wr_ptr] = cyc;
      wr_ptr++;
      in_valid = 1;
    end
    @(negedge clk);
    in_valid = 0;
    repeat (MUL_LAT + ADD_LAT + 3) @(negedge clk);
    if (rd_ptr != N) begin
      failures++;
      $display("FAIL %0d rows missing", N - rd_ptr);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
