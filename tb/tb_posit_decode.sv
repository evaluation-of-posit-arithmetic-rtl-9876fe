// tb_posit_decode: checks the Posit(32,2) decoder against the bit-serial
// reference expansion. For every input the decoded sign, scale and 29-bit
// two's-complement significand must describe exactly the value the
// reference finds; zero and NaR must be flagged. Inputs: hand-picked
// corner words (zero, NaR, +-1, maxpos, minpos, the longest regimes) and
// random words over the whole 32-bit range. Purely combinational, so each
// check is made one time step after the input is applied.
module tb_posit_decode;
  import posit_pkg::*;
  import posit_ref_pkg::*;

  posit_t     p;
  posit_int_t d;
  int checks = 0, failures = 0;

  posit_decode dut (.p(p), .d(d));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input posit_t x);
    bit s, z, n;
    big_t m, mag;
    int ex, h;
    p = x;
    #1;
    ref_expand(x, s, m, ex, z, n);
    checks++;
    if (z || n) begin
      if (d.zero != z || d.nar != n) begin
        failures++;
        $display("FAIL %h: zero/nar flags %b%b", x, d.zero, d.nar);
      end
      return;
    end
    h = 0;
    for (int i = 0; i < 64; i++) if (m[i]) h = i;
    mag = d.sig[SIG_W-1] ? big_t'(SIG_W'(-d.sig)) : big_t'(d.sig);
    if (d.zero || d.nar || (d.sig[SIG_W-1] != s) || (mag != (m << (27 - h))) ||
        (int'(d.scale) != ex + h)) begin
      failures++;
      if (failures < 10) $display("FAIL %h: sig=%h scale=%0d, expected m=%h h=%0d ex=%0d", x, d.sig, d.scale, m, h, ex);
    end
  endtask

  initial begin
    check(32'h0000_0000);
    check(32'h8000_0000);
    check(32'h4000_0000);   // 1.0
    check(32'hC000_0000);   // -1.0
    check(32'h4800_0000);   // 2.0
    check(32'h3800_0000);   // 0.5
    check(32'h7FFF_FFFF);   // maxpos
    check(32'h8000_0001);   // -maxpos
    check(32'h0000_0001);   // minpos
    check(32'hFFFF_FFFF);   // -minpos
    check(32'h7FFF_FFFE);
    check(32'h0000_0002);
    check(32'h0000_0003);
    for (int i = 0; i < 31; i++) begin
      check(32'h7FFF_FFFF >> i);
      check(32'h1 << i);
    end
    repeat (5000) check($urandom);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
