// bank_ram: one bank of on-chip buffer memory, DEPTH words of W bits, one
// write port and one read port with a registered (one-cycle) read, the
// shape of an FPGA block RAM. The GEMM buffers are built from DIM such
// banks so that a whole 16-element slice of a matrix row can be read or
// written in one cycle. Contents are not reset.
module bank_ram #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 4096,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
