// delay_line: a chain of D registers of W bits (D = 0 is a plain wire).
// Used for the input skew and output de-skew of the systolic array and for
// aligning partial sums with products inside a PE. No reset: the valid bit
// that travels with the data is delayed by a separate, reset chain.
module delay_line #(
  parameter int unsigned W = 32,
  parameter int unsigned D = 1
) (
  input  logic         clk,
  input  logic [W-1:0] din,
  output logic [W-1:0] dout
);
  if (D == 0) begin : g_wire
    assign dout = din;
  end else begin : g_regs
    logic [W-1:0] q [D];
    always_ff @(posedge clk) begin
      q[0] <= din;
      for (int i = 1; i < D; i++) q[i] <= q[i-1];
    end
    assign dout = q[D-1];
  end
endmodule
