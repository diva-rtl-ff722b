// dma_unit: moves data between off-chip DRAM and the on-chip buffers.
//
// A descriptor (dma_cmd_t) is accepted when cmd_ready is high.
//  Load  (store = 0): len DRAM beats starting at dram_addr are read and
//        written, in order, into consecutive lines of the LHS or RHS input
//        buffer starting at buf_addr (to_rhs selects the buffer; this is the
//        demultiplexer in front of the two input buffers). Read requests are
//        issued back to back, one per clock while the DRAM accepts them, and
//        the DRAM returns data in request order.
//  Store (store = 1): len output-buffer rows starting at buf_addr are read and
//        each is written to DRAM as BEATS consecutive beats (a 128 x FP32 row
//        is two 2048-bit beats) starting at dram_addr. Writes are posted.
// done pulses for one clock when a transfer has completed.
// The role of the unit follows the paper; the descriptor, beat size, request
// channel and in-order responses are this design's choices.
// The latched descriptor's store bit is not read again: the direction is
// already held in the state, so the linter lists that bit as unused.
module dma_unit
  import diva_pkg::*;
#(
  parameter int unsigned PE_H   = 128,
  parameter int unsigned PE_W   = 128,
  parameter int unsigned DW     = 2048,
  parameter int unsigned IB_AW  = 14,
  parameter int unsigned OB_AW  = 14,
  localparam int unsigned BEATS = (PE_W * 32) / DW
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   cmd_valid,
  output logic                   cmd_ready,
  input  dma_cmd_t               cmd,
  output logic                   done,
  // DRAM
  output logic                   mem_req_valid,
  input  logic                   mem_req_ready,
  output logic                   mem_req_write,
  output logic [DADDR_W-1:0]     mem_req_addr,
  output logic [DW-1:0]          mem_req_wdata,
  input  logic                   mem_rsp_valid,
  input  logic [DW-1:0]          mem_rsp_data,
  // input buffer write port (shared address and data, one enable per buffer)
  output logic                   lhs_we,
  output logic                   rhs_we,
  output logic [IB_AW-1:0]       ib_waddr,
  output logic [DW-1:0]          ib_wdata,
  // output buffer read port
  output logic                   ob_re,
  output logic [OB_AW-1:0]       ob_raddr,
  input  logic                   ob_rvalid,
  input  logic [PE_W*32-1:0]     ob_rdata
);

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_ST_RD, S_ST_WAIT, S_ST_WR} state_e;

  state_e              state;
  dma_cmd_t            c;
  logic [ADDR_W-1:0]   issued, received, rows_done;
  logic [PE_W*32-1:0]  row_buf;
  logic [$clog2(BEATS+1)-1:0] beat;

  initial assert (DW * BEATS == PE_W * 32 && DW == PE_H * 16)
    else $error("dma_unit: a DRAM beat must be one input line and divide an output row");

  assign cmd_ready = (state == S_IDLE);

  // DRAM request channel
  always_comb begin
    mem_req_valid = 1'b0;
    mem_req_write = 1'b0;
    mem_req_addr  = '0;
    mem_req_wdata = row_buf[0 +: DW];
    case (state)
      S_LOAD: begin
        mem_req_valid = (issued != c.len);
        mem_req_addr  = c.dram_addr + DADDR_W'(issued);
      end
      S_ST_WR: begin
        mem_req_valid = 1'b1;
        mem_req_write = 1'b1;
        mem_req_addr  = c.dram_addr + DADDR_W'(rows_done) * DADDR_W'(BEATS) + DADDR_W'(beat);
        mem_req_wdata = row_buf[int'(beat) * DW +: DW];
      end
      default: ;
    endcase
  end

  // demultiplexed input buffer writes
  assign lhs_we   = (state == S_LOAD) && mem_rsp_valid && !c.to_rhs;
  assign rhs_we   = (state == S_LOAD) && mem_rsp_valid &&  c.to_rhs;
  assign ib_waddr = IB_AW'(c.buf_addr + received);
  assign ib_wdata = mem_rsp_data;

  assign ob_re    = (state == S_ST_RD);
  assign ob_raddr = OB_AW'(c.buf_addr + rows_done);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      c         <= '0;
      issued    <= '0;
      received  <= '0;
      rows_done <= '0;
      beat      <= '0;
      done      <= 1'b0;
      row_buf   <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (cmd_valid) begin
          c         <= cmd;
          issued    <= '0;
          received  <= '0;
          rows_done <= '0;
          beat      <= '0;
          if (cmd.len == '0)   done  <= 1'b1;
          else if (cmd.store)  state <= S_ST_RD;
          else                 state <= S_LOAD;
        end
        S_LOAD: begin
          if (mem_req_valid && mem_req_ready) issued <= issued + 1'b1;
          if (mem_rsp_valid) begin
            received <= received + 1'b1;
            if (received + 1'b1 == c.len) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end
          end
        end
        S_ST_RD:   state <= S_ST_WAIT;
        S_ST_WAIT: if (ob_rvalid) begin
          row_buf <= ob_rdata;
          beat    <= '0;
          state   <= S_ST_WR;
        end
        S_ST_WR: if (mem_req_ready) begin
          if (int'(beat) == int'(BEATS) - 1) begin
            beat      <= '0;
            rows_done <= rows_done + 1'b1;
            if (rows_done + 1'b1 == c.len) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              state <= S_ST_RD;
            end
          end else begin
            beat <= beat + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
                                   mem_rsp_valid |-> (state == S_LOAD && received != issued));

endmodule
