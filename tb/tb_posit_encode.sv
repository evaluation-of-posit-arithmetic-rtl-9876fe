// tb_posit_encode: checks the post-processing unit (normalise, regime
// encoding, round to nearest even, saturation) against the bit-serial
// reference rounding. The encoder is used at the adder's geometry (62-bit
// signed significand, binary point at bit 59). Random signed significands
// of random effective widths, random sticky bits and scales from -160 to
// +160 are streamed one per cycle; each result must appear exactly 2 cycles
// later and equal the reference, which rounds the exact value
// (2*|sig| + sticky) * 2^(scale-60), i.e. a value strictly inside the
// interval the sticky bit stands for. The sticky bit is set only with
// significands of more than 40 bits, as in the adder.
module tb_posit_encode;
  import posit_pkg::*;
  import posit_ref_pkg::*;

  localparam int W = 62, FP = 59, LAT = 2;

  logic clk = 0;
  always #5 clk = ~clk;

  logic signed [W-1:0]       sig;
  logic                      sticky, zero, nar;
  logic signed [SCALE_W-1:0] scale;
  posit_t                    result;
  int checks = 0, failures = 0, saturations = 0, tie_cases = 0;

  posit_encode #(.W(W), .FP(FP)) dut (
    .clk(clk), .sig(sig), .sticky(sticky), .scale(scale),
    .zero(zero), .nar(nar), .result(result)
  );

  posit_t expq[$];

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic posit_t expected(input logic signed [W-1:0] s, input bit st,
                                      input int sc, input bit z, input bit n);
    big_t mag;
    if (n) return POSIT_NAR;
    if (z) return POSIT_ZERO;
    if (s < 0) mag = st ? big_t'(W'(~s)) : big_t'(W'(-s));
    else       mag = big_t'(s);
    if (mag == 0 && !st) return POSIT_ZERO;
    return ref_round(s < 0, (mag << 1) | big_t'(st), sc - FP - 1);
  endfunction

  task automatic drive(input logic signed [W-1:0] s, input bit st, input int sc,
                       input bit z, input bit n);
    @(negedge clk);
    drv_valid = 1;
    sig = s; sticky = st; scale = SCALE_W'(sc); zero = z; nar = n;
    expq.push_back(expected(s, st, sc, z, n));
  endtask

  // Compare LAT cycles after each drive.
  int cyc = 0;
  posit_t pipe_exp [LAT+1];
  bit     pipe_v   [LAT+1];
  logic   drv_valid = 0;

  always @(posedge clk) begin
    cyc++;
    for (int i = LAT; i > 0; i--) begin
      pipe_exp[i] = pipe_exp[i-1];
      pipe_v[i]   = pipe_v[i-1];
    end
    pipe_v[0] = drv_valid;
    if (drv_valid) pipe_exp[0] = expq.pop_front();
  end

  always @(negedge clk) begin
    if (pipe_v[LAT-1]) begin
      checks++;
      if (result != pipe_exp[LAT-1]) begin
        failures++;
        if (failures < 10) $display("FAIL got %h expected %h", result, pipe_exp[LAT-1]);
      end
      if (result == POSIT_MAXPOS || result == POSIT_MINPOS ||
          result == -POSIT_MAXPOS || result == -POSIT_MINPOS) saturations++;
    end
  end

  initial begin
    for (int i = 0; i <= LAT; i++) pipe_v[i] = 0;
    sig = '0; sticky = 0; scale = '0; zero = 0; nar = 0;
    // exact 1.0 at the binary point
    drive(62'sd1 <<< FP, 0, 0, 0, 0);
    drive(-(62'sd1 <<< FP), 0, 0, 0, 0);
    drive(62'sd3 <<< (FP - 1), 0, 0, 0, 0);     // 1.5
    drive('0, 0, 5, 0, 0);                       // zero from cancellation
    drive('0, 0, 0, 1, 0);
    drive('0, 0, 0, 0, 1);
    drive(62'sd1 <<< FP, 0, 200, 0, 0);          // overflow -> maxpos
    drive(62'sd1 <<< FP, 0, -200, 0, 0);         // underflow -> minpos
    // A tie: 1 + 2^-28 rounds to even (down); with sticky it rounds up.
    drive((62'sd1 <<< FP) + (62'sd1 <<< (FP - 28)), 0, 0, 0, 0);
    drive((62'sd1 <<< FP) + (62'sd1 <<< (FP - 28)), 1, 0, 0, 0);
    tie_cases += 2;
    repeat (6000) begin
      logic signed [63:0] r;
      int wdt;
      r = {$urandom, $urandom};
      wdt = $urandom_range(61, 1);
      r = r >>> (63 - wdt);
      // The sticky bit only ever accompanies a significand with far more
      // bits than a posit fraction holds (see posit_encode).
      drive(r[W-1:0], (wdt > 40) ? 1'($urandom_range(1)) : 1'b0,
            int'($urandom_range(320)) - 160, 0, 0);
    end
    @(negedge clk);
    drv_valid = 0;
    repeat (LAT + 2) @(negedge clk);
    if (saturations == 0) begin
      failures++;
      $display("FAIL saturation never exercised");
    end
    $display("saturations=%0d", saturations);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
