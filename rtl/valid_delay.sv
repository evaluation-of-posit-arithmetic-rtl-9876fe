// valid_delay: D-cycle delay of a single valid flag, cleared by reset, so
// that nothing downstream sees a spurious valid after reset. D = 0 is a wire.
module valid_delay #(
  parameter int unsigned D = 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic din,
  output logic dout
);
  if (D == 0) begin : g_wire
    assign dout = din;
  end else begin : g_regs
    logic [D-1:0] q;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) q <= '0;
      else        q <= (q << 1) | D'(din);
    end
    assign dout = q[D-1];
  end
endmodule
