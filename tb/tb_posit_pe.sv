// tb_posit_pe: checks one processing element. A weight is shifted in, then
// operand / partial-sum pairs are streamed (with random gaps); every
// psum_out must equal round(round(a*w) + psum) from the reference model and
// appear exactly PE_LAT = 11 cycles after its inputs, the A operand must
// reappear on a_out one cycle later, and w_out must show the weight. The
// weight is changed twice during the run.
module tb_posit_pe;
  import posit_pkg::*;
  import posit_ref_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  logic   rst_n = 1;
  posit_t a_in = '0, w_in = '0, psum_in = '0;
  logic   a_valid_in = 0, w_shift = 0, psum_valid_in = 0;
  posit_t a_out, w_out, psum_out;
  logic   a_valid_out, psum_valid_out;
  int checks = 0, failures = 0, cyc = 0;

  posit_pe dut (.*);

  posit_t expq[$], aq[$];
  int     tq[$];
  posit_t w_cur;

  // Assert the asynchronous reset at the start, so that it takes effect at once.
  initial #1 rst_n = 0;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (a_valid_in) begin
      expq.push_back(ref_add(ref_mul(a_in, w_cur), psum_in));
      aq.push_back(a_in);
      tq.push_back(cyc);
    end
  end

  // a_out one cycle after a_in
  posit_t a_prev;
  logic   av_prev = 0;
  always @(posedge clk) begin
    a_prev  <= a_in;
    av_prev <= a_valid_in;
  end
  always @(negedge clk) begin
    if (av_prev) begin
      checks++;
      if (!a_valid_out || a_out != a_prev) begin
        failures++;
        $display("FAIL a_out %h expected %h", a_out, a_prev);
      end
    end
    if (psum_valid_out) begin
      posit_t e;
      int t;
      checks++;
      e = expq.pop_front();
      t = tq.pop_front();
      void'(aq.pop_front());
      if (psum_out != e || cyc - t != int'(PE_LAT)) begin
        failures++;
        if (failures < 10) $display("FAIL psum %h expected %h after %0d cycles", psum_out, e, cyc - t);
      end
    end
  end

  task automatic load_w(input posit_t w);
    @(negedge clk);
    a_valid_in = 0; psum_valid_in = 0;
    w_in = w; w_shift = 1;
    @(negedge clk);
    w_shift = 0;
    w_cur = w;
    checks++;
    if (w_out != w) begin
      failures++;
      $display("FAIL w_out %h expected %h", w_out, w);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int phase = 0; phase < 3; phase++) begin
      load_w(rand_posit(6));
      repeat (800) begin
        @(negedge clk);
        if ($urandom_range(4) == 0) begin
          a_valid_in = 0; psum_valid_in = 0;
        end else begin
          a_in = rand_posit(6); psum_in = ($urandom_range(5) == 0) ? POSIT_ZERO : rand_posit(6);
          a_valid_in = 1; psum_valid_in = 1;
        end
      end
      @(negedge clk);
      a_valid_in = 0; psum_valid_in = 0;
      repeat (PE_LAT + 2) @(negedge clk);   // drain before the weight changes
    end
    if (expq.size() != 0) begin
      failures++;
      $display("FAIL %0d results missing", expq.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
