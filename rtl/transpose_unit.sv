// transpose_unit: transposes operand tiles between an input buffer and the
// control unit.
//
// The engine needs columns of A and rows of B. When an operand is stored the
// other way round (A row-major, or B column-major) this unit turns it over:
// with mode_tr high, each vector arriving on in_vec is written as the next row
// of a LANES x LANES register tile; col_req then reads column col_idx of the
// tile, which appears on out_vec one clock later. clear zeroes the tile and
// rewinds the row pointer, so rows never written read as zero (tiles with
// fewer than LANES rows are padded). With mode_tr low, vectors pass straight
// through, so a buffer read (one clock) and a column read (one clock) reach
// the engine with the same latency.
// The unit's place in the datapath follows the paper; its insides (a single
// register tile, fill then read, no double buffering) are this design's. The
// im2col permutation the paper also assigns to this unit is not implemented.
module transpose_unit #(
  parameter int unsigned LANES = 128,
  localparam int unsigned IW   = $clog2(LANES)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clear,
  input  logic                   mode_tr,
  input  logic                   in_valid,
  input  logic [LANES-1:0][15:0] in_vec,
  input  logic                   col_req,
  input  logic [IW-1:0]          col_idx,
  output logic                   out_valid,
  output logic [LANES-1:0][15:0] out_vec
);

  logic [LANES-1:0][15:0] tile [LANES];
  logic [IW:0]            wr_row;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_row <= '0;
      for (int r = 0; r < int'(LANES); r++) tile[r] <= '0;
    end else if (clear) begin
      wr_row <= '0;
      for (int r = 0; r < int'(LANES); r++) tile[r] <= '0;
    end else if (mode_tr && in_valid && (wr_row < (IW+1)'(LANES))) begin
      tile[wr_row[IW-1:0]] <= in_vec;
      wr_row               <= wr_row + 1'b1;
    end
  end

  logic                   col_valid;
  logic [LANES-1:0][15:0] col_vec;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) col_valid <= 1'b0;
    else        col_valid <= mode_tr && col_req;
  end

  always_ff @(posedge clk) begin
    if (mode_tr && col_req)
      for (int r = 0; r < int'(LANES); r++) col_vec[r] <= tile[r][col_idx];
  end

  // pass-through is combinational, so both modes add up to one clock
  // from request (buffer read or col_req) to out_valid
  assign out_valid = mode_tr ? col_valid : in_valid;
  assign out_vec   = mode_tr ? col_vec   : in_vec;

endmodule
