// input_buffer: one partition of the on-chip SRAM holding an input operand.
//
// The LHS and RHS operands each get one instance. A line is one PE-side
// vector of LANES BF16 elements (256 bytes for 128 lanes), the amount the
// engine consumes per operand per clock. The DMA unit writes lines through
// the write port; the control unit reads one line per clock through the read
// port, with the data on rdata one clock after re (rvalid marks it).
// The 16 MB total SRAM follows the paper; the 4 MB per input partition, the
// line organisation and the simple dual-port timing are this design's. It is
// written as an array; an implementation would map it to SRAM macros.
module input_buffer #(
  parameter int unsigned LANES = 128,
  parameter int unsigned DEPTH = 16384,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   we,
  input  logic [AW-1:0]          waddr,
  input  logic [LANES-1:0][15:0] wdata,
  input  logic                   re,
  input  logic [AW-1:0]          raddr,
  output logic                   rvalid,
  output logic [LANES-1:0][15:0] rdata
);

  logic [LANES-1:0][15:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata      <= mem[raddr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rvalid <= 1'b0;
    else        rvalid <= re;
  end

endmodule
