// output_buffer: the on-chip SRAM partition that holds output tiles.
//
// Rows are PE_W FP32 values. The buffer is split into R banks interleaved by
// row number (row r lives in bank r mod R), so the R rows the GEMM engine
// drains in one clock (rows wrow .. wrow+R-1, wrow a multiple of R) are
// written in a single cycle; wmask selects which of the R rows are written.
// The DMA unit reads one row per clock: rdata follows re by one clock.
// The write bandwidth of R rows per clock follows the paper; the 8 MB size,
// the banking and the port timing are this design's choices.
module output_buffer #(
  parameter int unsigned R    = 8,
  parameter int unsigned PE_W = 128,
  parameter int unsigned ROWS = 16384,
  localparam int unsigned AW  = $clog2(ROWS),
  localparam int unsigned BW  = $clog2(R),
  localparam int unsigned BD  = ROWS / R
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         we,
  input  logic [R-1:0]                 wmask,
  input  logic [AW-1:0]                wrow,
  input  logic [R-1:0][PE_W-1:0][31:0] wdata,
  input  logic                         re,
  input  logic [AW-1:0]                raddr,
  output logic                         rvalid,
  output logic [PE_W-1:0][31:0]        rdata
);

  logic [PE_W-1:0][31:0] bank [R][BD];

  always_ff @(posedge clk) begin
    for (int b = 0; b < int'(R); b++)
      if (we && wmask[b]) bank[b][wrow[AW-1:BW]] <= wdata[b];
    if (re) rdata <= bank[raddr[BW-1:0]][raddr[AW-1:BW]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rvalid <= 1'b0;
    else        rvalid <= re;
  end

  a_aligned: assert property (@(posedge clk) disable iff (!rst_n) we |-> (wrow[BW-1:0] == '0));

endmodule
