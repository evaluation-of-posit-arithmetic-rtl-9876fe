// tb_bank_ram: checks one buffer bank at its default depth (4096 words):
// random writes fill a shadow copy, random reads must return the shadow
// value one cycle after the read request, the output must hold while re is
// low, and a simultaneous write to the address being read must return the
// old word (read-before-write).
module tb_bank_ram;
  localparam int W = 32, DEPTH = 4096;
  logic clk = 0;
  always #5 clk = ~clk;
  logic          we = 0, re = 0;
  logic [11:0]   waddr = 0, raddr = 0;
  logic [W-1:0]  wdata = 0, rdata;
  logic [W-1:0]  shadow [DEPTH];
  int checks = 0, failures = 0;

  bank_ram #(.W(W), .DEPTH(DEPTH)) dut (.*);

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] e, held;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1; waddr = 12'(i); wdata = $urandom; shadow[i] = wdata;
    end
    @(negedge clk);
    we = 0;
    repeat (3000) begin
      @(negedge clk);
      raddr = 12'($urandom_range(DEPTH - 1));
      re = 1;
      e = shadow[raddr];
      if ($urandom_range(1) != 0) begin
        we = 1;
        waddr = ($urandom_range(3) == 0) ? raddr : 12'($urandom_range(DEPTH - 1));
        wdata = $urandom;
        shadow[waddr] = wdata;
      end else we = 0;
      @(negedge clk);
      re = 0; we = 0;
      checks++;
      if (rdata != e) begin
        failures++;
        if (failures < 10) $display("FAIL read %h got %h expected %h", raddr, rdata, e);
      end
      held = rdata;
      @(negedge clk);
      checks++;
      if (rdata != held) begin
        failures++;
        $display("FAIL output changed without re");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
