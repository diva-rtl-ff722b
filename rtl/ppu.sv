// ppu: post-processing unit computing per-example squared L2 gradient norms.
//
// The GEMM engine drains R rows of PE_W FP32 weight-gradient elements per
// clock straight into the PPU. Each element is squared (FP32 multiply, one
// register stage), each of the R rows is reduced by its own pipelined adder
// tree of log2(PE_W) levels, the R row sums are combined by a small tree of
// log2(R) levels, and the result is added into an FP32 accumulator. The
// accumulator keeps running over all drain cycles of a tile and over further
// tiles (and layers) of the same example; a beat with in_first high replaces
// it instead, starting the next example. One beat is accepted every clock, so
// the PPU keeps pace with the drain rate of the engine.
// Latency: 1 (square) + log2(PE_W) + log2(R) clocks to the accumulator input,
// plus one clock to norm_sq; busy is high while any beat is in flight.
// The square-then-tree structure, R trees of log2(PE_W) levels and the rate
// follow the paper. Combining the row sums, the accumulator, and leaving the
// square root and the clipping factor to software are this design's choices.
// Only the valid bit of row tree 0 is used: all R trees run in lock step,
// so the others carry the same information and are left unread.
module ppu #(
  parameter int unsigned R    = 8,
  parameter int unsigned PE_W = 128
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  input  logic                         in_first,
  input  logic [R-1:0][PE_W-1:0][31:0] in_rows,
  output logic [31:0]                  norm_sq,
  output logic                         busy
);
  import fp_pkg::*;

  localparam int unsigned LAT = 1 + $clog2(PE_W) + $clog2(R);

  logic [R-1:0][PE_W-1:0][31:0] sq;
  logic                         sq_valid;
  logic [R-1:0][31:0]           row_sum;
  logic [R-1:0]                 row_valid;
  logic [31:0]                  tot;
  logic                         tot_valid;
  logic [LAT-1:0]               first_pipe, valid_pipe;

  // stage 1: element-wise square
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sq_valid <= 1'b0;
    else        sq_valid <= in_valid;
  end
  always_ff @(posedge clk) begin
    for (int r = 0; r < int'(R); r++)
      for (int j = 0; j < int'(PE_W); j++)
        sq[r][j] <= fp32_mul(in_rows[r][j], in_rows[r][j]);
  end

  // R row trees
  for (genvar r = 0; r < R; r++) begin : g_tree
    adder_tree #(.N(PE_W)) u_tree (
      .clk, .rst_n, .in_valid(sq_valid), .in_vec(sq[r]),
      .out_valid(row_valid[r]), .sum(row_sum[r]));
  end

  // combine the R row sums
  adder_tree #(.N(R)) u_combine (
    .clk, .rst_n, .in_valid(row_valid[0]), .in_vec(row_sum),
    .out_valid(tot_valid), .sum(tot));

  // in_first travels alongside the data
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      first_pipe <= '0;
      valid_pipe <= '0;
    end else begin
      first_pipe <= {first_pipe[LAT-2:0], in_valid & in_first};
      valid_pipe <= {valid_pipe[LAT-2:0], in_valid};
    end
  end

  // accumulator
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) norm_sq <= FP32_ZERO;
    else if (tot_valid) begin
      if (first_pipe[LAT-1]) norm_sq <= tot;
      else                   norm_sq <= fp32_add(norm_sq, tot);
    end
  end

  assign busy = |valid_pipe;

  a_pipe_aligned: assert property (@(posedge clk) disable iff (!rst_n) tot_valid == valid_pipe[LAT-1]);

endmodule
