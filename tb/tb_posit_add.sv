// tb_posit_add: checks the pipelined Posit(32,2) adder against the
// bit-serial reference model, bit for bit, and checks its latency.
// Operands are issued one per cycle with gaps at random: corner values
// (zero, NaR, +-1, maxpos, minpos), values of moderate size (scale within
// +-8, the region where the fraction is longest), values of any size, and
// random 32-bit patterns. Every result must appear with out_valid exactly
// ADD_LAT cycles (posit_pkg) after its operands went in.
module tb_posit_add;
  import posit_pkg::*;
  import posit_ref_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  logic   rst_n = 1;
  logic   in_valid = 0;
  posit_t a = '0, b = '0;
  logic   out_valid;
  posit_t result;
  int checks = 0, failures = 0, cyc = 0;
  int n_nar = 0, n_zero = 0, n_sat = 0;

  posit_add dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .a(a), .b(b),
                 .out_valid(out_valid), .result(result));

  posit_t expq[$];
  int     issueq[$];

  // Assert the asynchronous reset at the start, so that it takes effect at once.
  initial #1 rst_n = 0;

  initial begin
    #3000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (in_valid) begin
      expq.push_back(ref_add(a, b));
      issueq.push_back(cyc);
    end
    if (out_valid) begin
      posit_t e;
      int     t;
      checks++;
      if (expq.size() == 0) begin
        failures++;
        $display("FAIL result without operands");
      end else begin
        e = expq.pop_front();
        t = issueq.pop_front();
        if (result != e || cyc - t != int'(ADD_LAT)) begin
          failures++;
          if (failures < 10)
            $display("FAIL got %h expected %h after %0d cycles", result, e, cyc - t);
        end
        if (e == POSIT_NAR) n_nar++;
        if (e == POSIT_ZERO) n_zero++;
        if (e == POSIT_MAXPOS || e == POSIT_MINPOS || e == -POSIT_MAXPOS || e == -POSIT_MINPOS) n_sat++;
      end
    end
  end

  task automatic issue(input posit_t x, input posit_t y);
    @(negedge clk);
    a = x; b = y; in_valid = 1;
  endtask

  posit_t corner [10] = '{32'h0, 32'h8000_0000, 32'h4000_0000, 32'hC000_0000,
                          32'h7FFF_FFFF, 32'h8000_0001, 32'h0000_0001, 32'hFFFF_FFFF,
                          32'h4800_0000, 32'h3800_0000};

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (corner[i]) foreach (corner[j]) issue(corner[i], corner[j]);
    repeat (4000) issue(rand_posit(8), rand_posit(8));
    repeat (2000) issue(rand_posit(0), rand_posit(0));
    repeat (2000) issue(rand_posit(130), rand_posit(130));
    repeat (3000) begin
      if ($urandom_range(3) == 0) begin
        @(negedge clk);
        in_valid = 0;
      end
      issue(rand_pattern(), rand_pattern());
    end
    @(negedge clk);
    in_valid = 0;
    repeat (int'(ADD_LAT) + 3) @(negedge clk);
    if (expq.size() != 0) begin
      failures++;
      $display("FAIL %0d results missing", expq.size());
    end
    if (n_nar == 0 || n_zero == 0 || n_sat == 0) begin
      failures++;
      $display("FAIL special case not exercised");
    end
    $display("nar=%0d zero=%0d saturated=%0d", n_nar, n_zero, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
