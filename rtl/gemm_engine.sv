// gemm_engine: outer-product GEMM engine (PE_H x PE_W spatial PE array).
//
// An (M,K,N) matrix product C = A x B is computed as a sum of K outer
// products: in step k the column a_k of A (length PE_H) and the row b_k of B
// (length PE_W) are broadcast along the row and column buses and every PE
// (i,j) accumulates a_k[i] * b_k[j]. All PE_H*PE_W MACs are useful every step,
// whatever K is, which is what makes the engine efficient for the small-K
// products of per-example weight gradients.
//
// Front end: two vector queues (LHS columns, RHS rows). start latches k_steps;
// from then on a step is taken in every cycle in which both queues hold a
// vector (an empty queue stalls the array). The first step of a tile loads the
// products, the following ones accumulate; with acc_continue set at start,
// the first step also accumulates, so a long K can be split over several
// starts (for instance when its operands do not fit the input buffers).
// done pulses in the cycle of the
// last step; busy is high from start to that cycle.
//
// Drain: with the array idle, drain_req with group index g returns, one cycle
// later on drain_rows, accumulator rows g*R .. g*R+R-1 (R rows per clock, so
// PE_H/R cycles for the whole tile).
//
// Following the paper: outer-product dataflow, row/column broadcast, local
// accumulation, K cycles per tile, R rows drained per clock. This design's own
// choices: the queue depth, the start/k_steps handshake, acc_continue, registered drain
// output, and no overlap of computing and draining.
// The queues' full outputs are left open: the control unit throttles on
// afull, one entry earlier, and the queues assert against overflow. The
// reset is asynchronous for the flops; the assertions use it as a
// synchronous disable, which the linter reports as a mixed-use net.
module gemm_engine #(
  parameter int unsigned PE_H   = 128,
  parameter int unsigned PE_W   = 128,
  parameter int unsigned R      = 8,
  parameter int unsigned QDEPTH = 4,
  localparam int unsigned NGRP  = PE_H / R,
  localparam int unsigned GW    = (NGRP > 1) ? $clog2(NGRP) : 1
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // LHS vector queue (columns of A)
  input  logic                              lhs_push,
  input  logic [PE_H-1:0][15:0]             lhs_vec,
  output logic                              lhs_afull,
  // RHS vector queue (rows of B)
  input  logic                              rhs_push,
  input  logic [PE_W-1:0][15:0]             rhs_vec,
  output logic                              rhs_afull,
  // tile control
  input  logic                              start,
  input  logic [15:0]                       k_steps,
  input  logic                              acc_continue, // keep adding onto the accumulators
  output logic                              busy,
  output logic                              done,
  output logic                              stall,      // busy but a queue is empty
  // drain port
  input  logic                              drain_req,
  input  logic [GW-1:0]                     drain_grp,
  output logic                              drain_valid,
  output logic [R-1:0][PE_W-1:0][31:0]      drain_rows
);

  logic [PE_H-1:0][15:0] a_bus;
  logic [PE_W-1:0][15:0] b_bus;
  logic                  lq_empty, rq_empty;
  logic                  fire, first_step;
  logic [15:0]           steps_left;
  logic [31:0]           acc [PE_H][PE_W];

  vector_queue #(.LANES(PE_H), .DEPTH(QDEPTH)) u_lhs_q (
    .clk, .rst_n, .push(lhs_push), .din(lhs_vec), .pop(fire), .dout(a_bus),
    .empty(lq_empty), .full(), .afull(lhs_afull));

  vector_queue #(.LANES(PE_W), .DEPTH(QDEPTH)) u_rhs_q (
    .clk, .rst_n, .push(rhs_push), .din(rhs_vec), .pop(fire), .dout(b_bus),
    .empty(rq_empty), .full(), .afull(rhs_afull));

  assign fire  = busy && !lq_empty && !rq_empty;
  assign stall = busy && (lq_empty || rq_empty);
  assign done  = fire && (steps_left == 16'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      steps_left <= '0;
      first_step <= 1'b0;
    end else if (start && !busy) begin
      busy       <= (k_steps != 16'd0);
      steps_left <= k_steps;
      first_step <= !acc_continue;
    end else if (fire) begin
      steps_left <= steps_left - 16'd1;
      first_step <= 1'b0;
      if (steps_left == 16'd1) busy <= 1'b0;
    end
  end

  // all-to-all multiplication: PE (i,j) sees row bus i and column bus j
  for (genvar i = 0; i < PE_H; i++) begin : g_row
    for (genvar j = 0; j < PE_W; j++) begin : g_col
      pe u_pe (
        .clk, .rst_n,
        .en(fire), .first(first_step),
        .a(a_bus[i]), .b(b_bus[j]),
        .acc(acc[i][j]));
    end
  end

  // drain R rows per clock
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) drain_valid <= 1'b0;
    else        drain_valid <= drain_req;
  end

  always_ff @(posedge clk) begin
    if (drain_req) begin
      for (int r = 0; r < int'(R); r++)
        for (int j = 0; j < int'(PE_W); j++)
          drain_rows[r][j] <= acc[int'(drain_grp) * int'(R) + r][j];
    end
  end

  a_no_drain_while_busy: assert property (@(posedge clk) disable iff (!rst_n) drain_req |-> !busy);
  a_no_start_while_busy: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);

endmodule
