// vector_queue: FIFO of whole input vectors feeding one side of the PE array.
//
// The GEMM engine has two of these, one holding LHS columns (one element per
// PE row) and one holding RHS rows (one element per PE column). A vector pair
// is popped every cycle in which both queues hold data, so the queues absorb
// the jitter between the buffer reads and the array.
// Interface: push/din write the tail; dout is the head (valid while !empty);
// pop removes it. afull is high when fewer than two entries are free, which
// lets a producer with one cycle of read latency stop early enough.
// Timing: a pushed vector is visible at dout the next cycle.
// The queues appear by name in the paper's array drawing; depth, the afull
// rule and one queue per operand (rather than per lane) are this design's.
module vector_queue #(
  parameter int unsigned LANES = 128,
  parameter int unsigned DEPTH = 4
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        push,
  input  logic [LANES-1:0][15:0]      din,
  input  logic                        pop,
  output logic [LANES-1:0][15:0]      dout,
  output logic                        empty,
  output logic                        full,
  output logic                        afull
);

  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [LANES-1:0][15:0] mem [DEPTH];
  logic [PW-1:0]          rd_ptr, wr_ptr;
  logic [PW:0]            count;

  assign empty = (count == '0);
  assign full  = (count == (PW+1)'(DEPTH));
  assign afull = (count > (PW+1)'(DEPTH - 2));
  assign dout  = mem[rd_ptr];

  function automatic logic [PW-1:0] incr(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= incr(wr_ptr);
      if (pop)  rd_ptr <= incr(rd_ptr);
      count <= count + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= din;
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop  |-> !empty);

endmodule
