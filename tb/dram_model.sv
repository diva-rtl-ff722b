// dram_model: behavioural model of the off-chip DRAM (not synthesizable).
//
// Holds WORDS beats of DW bits. One request is accepted per clock when
// req_ready is high (with RANDOM_STALL set, req_ready drops at random to
// exercise back-pressure). A read returns its beat on rsp_valid/rsp_data
// LATENCY clocks after acceptance (100 clocks by default, the access latency
// of the evaluated memory system), in request order; writes take effect at
// once and are not acknowledged. Testbenches preload and inspect mem directly.
module dram_model #(
  parameter int unsigned DW           = 2048,
  parameter int unsigned WORDS        = 4096,
  parameter int unsigned LATENCY      = 100,
  parameter bit          RANDOM_STALL = 1'b0
) (
  input  logic          clk,
  input  logic          req_valid,
  output logic          req_ready,
  input  logic          req_write,
  input  logic [31:0]   req_addr,
  input  logic [DW-1:0] req_wdata,
  output logic          rsp_valid,
  output logic [DW-1:0] rsp_data
);
  logic [DW-1:0] mem [WORDS];
  longint        cyc = 0;
  longint        due_q [$];
  logic [DW-1:0] dat_q [$];
  int            reads = 0, writes = 0;

  initial begin
    req_ready = 1'b1;
    rsp_valid = 1'b0;
    rsp_data  = '0;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (req_valid && req_ready) begin
      if (req_write) begin
        mem[req_addr % WORDS] <= req_wdata;
        writes++;
      end else begin
        due_q.push_back(cyc + LATENCY);
        dat_q.push_back(mem[req_addr % WORDS]);
        reads++;
      end
    end
    if (due_q.size() > 0 && due_q[0] <= cyc + 1) begin
      rsp_valid <= 1'b1;
      rsp_data  <= dat_q[0];
      void'(due_q.pop_front());
      void'(dat_q.pop_front());
    end else begin
      rsp_valid <= 1'b0;
    end
    req_ready <= RANDOM_STALL ? ($urandom % 4 != 0) : 1'b1;
  end
endmodule
