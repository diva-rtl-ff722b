// control_unit: main sequencer of the DiVa accelerator.
//
// Software issues a stream of diva_cmd_t commands that spell out the tiled
// GEMM order; the control unit runs them one at a time (cmd_ready is high only
// when idle):
//  OP_LOAD_LHS / OP_LOAD_RHS / OP_STORE: hands a descriptor to the DMA unit and
//     waits for its done pulse.
//  OP_GEMM: one output tile of C = A x B with K = k outer-product steps.
//     1. FILL   - for an operand flagged for transposition, lhs_rows (rhs_rows)
//                 lines are read from its input buffer into its transpose unit.
//     2. START  - the engine is started with k steps.
//     3. STREAM - k vector pairs are fed into the engine's vector queues, one
//                 pair per clock unless a queue reports afull. Each vector is
//                 either a buffer line (lhs_base + step) or column step of the
//                 transposed tile.
//     4. WAIT   - until the engine has taken its last step.
//     5. DRAIN  - PE_H/R clocks, group g each clock; the R rows of a group go
//                 either into the output buffer at out_base + g*R, or, with
//                 to_ppu set, into the PPU (norm_clear marks the first group
//                 so that the PPU starts a new per-example accumulation).
//     k_continue makes the engine add onto the accumulators left by the
//     previous GEMM, and no_drain skips step 5, so a K too long for the input
//     buffers is run as several GEMM commands with DMA loads in between.
//  OP_NORM_WR: waits until the PPU pipeline is empty, then writes its squared
//     norm into lane 0 of output row out_base (other lanes zero), from where
//     an OP_STORE can take it off chip.
// The division of work (control fills buffers via DMA, starts the outer
// product, routes PE outputs to the PPU or the buffer) follows the paper; the
// command set and the strictly sequential execution are this design's.
module control_unit
  import diva_pkg::*;
#(
  parameter int unsigned PE_H  = 128,
  parameter int unsigned PE_W  = 128,
  parameter int unsigned R     = 8,
  parameter int unsigned IB_AW = 14,
  parameter int unsigned OB_AW = 14,
  localparam int unsigned NGRP = PE_H / R,
  localparam int unsigned GW   = (NGRP > 1) ? $clog2(NGRP) : 1,
  localparam int unsigned HW   = $clog2(PE_H),
  localparam int unsigned WW   = $clog2(PE_W)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // command stream
  input  logic                         cmd_valid,
  output logic                         cmd_ready,
  input  diva_cmd_t                    cmd,
  output logic                         busy,
  // DMA
  output logic                         dma_valid,
  input  logic                         dma_ready,
  output dma_cmd_t                     dma_cmd,
  input  logic                         dma_done,
  // input buffer read ports
  output logic                         lhs_re,
  output logic [IB_AW-1:0]             lhs_raddr,
  output logic                         rhs_re,
  output logic [IB_AW-1:0]             rhs_raddr,
  // transpose units
  output logic                         tr_clear,
  output logic                         lhs_mode_tr,
  output logic                         lhs_col_req,
  output logic [HW-1:0]                lhs_col_idx,
  input  logic                         lhs_tr_valid,
  input  logic [PE_H-1:0][15:0]        lhs_tr_vec,
  output logic                         rhs_mode_tr,
  output logic                         rhs_col_req,
  output logic [WW-1:0]                rhs_col_idx,
  input  logic                         rhs_tr_valid,
  input  logic [PE_W-1:0][15:0]        rhs_tr_vec,
  // GEMM engine
  output logic                         eng_lhs_push,
  output logic [PE_H-1:0][15:0]        eng_lhs_vec,
  input  logic                         eng_lhs_afull,
  output logic                         eng_rhs_push,
  output logic [PE_W-1:0][15:0]        eng_rhs_vec,
  input  logic                         eng_rhs_afull,
  output logic                         eng_start,
  output logic [15:0]                  eng_k,
  output logic                         eng_acc_continue,
  input  logic                         eng_busy,
  output logic                         eng_drain_req,
  output logic [GW-1:0]                eng_drain_grp,
  input  logic                         eng_drain_valid,
  input  logic [R-1:0][PE_W-1:0][31:0] eng_drain_rows,
  // output buffer write port
  output logic                         ob_we,
  output logic [R-1:0]                 ob_wmask,
  output logic [OB_AW-1:0]             ob_wrow,
  output logic [R-1:0][PE_W-1:0][31:0] ob_wdata,
  // PPU
  output logic                         ppu_valid,
  output logic                         ppu_first,
  output logic [R-1:0][PE_W-1:0][31:0] ppu_rows,
  input  logic                         ppu_busy,
  input  logic [31:0]                  ppu_norm_sq
);

  typedef enum logic [3:0] {
    S_IDLE, S_DMA, S_DMA_WAIT, S_FILL, S_FILL_END, S_START, S_STREAM,
    S_WAIT_ENG, S_DRAIN, S_DRAIN_END, S_NORM_WAIT
  } state_e;

  state_e            state;
  diva_cmd_t         c;
  logic [ADDR_W-1:0] cnt;
  logic [ADDR_W-1:0] fill_n;
  logic [GW-1:0]     grp_d;
  logic              issue;

  assign cmd_ready = (state == S_IDLE);
  assign busy      = (state != S_IDLE);

  // DMA descriptor
  assign dma_valid         = (state == S_DMA);
  assign dma_cmd.store     = (c.op == OP_STORE);
  assign dma_cmd.to_rhs    = (c.op == OP_LOAD_RHS);
  assign dma_cmd.dram_addr = c.dram_addr;
  assign dma_cmd.buf_addr  = c.buf_addr;
  assign dma_cmd.len       = c.len;

  // transposer fill count: the larger of the two transposed operands
  always_comb begin
    fill_n = '0;
    if (c.lhs_tr) fill_n = c.lhs_rows;
    if (c.rhs_tr && c.rhs_rows > fill_n) fill_n = c.rhs_rows;
  end

  assign tr_clear    = cmd_valid && cmd_ready && (cmd.op == OP_GEMM);
  assign lhs_mode_tr = c.lhs_tr;
  assign rhs_mode_tr = c.rhs_tr;

  // streaming one vector pair per clock while both queues have room
  assign issue = (state == S_STREAM) && (cnt != c.k) && !eng_lhs_afull && !eng_rhs_afull;

  always_comb begin
    lhs_re      = 1'b0;
    rhs_re      = 1'b0;
    lhs_raddr   = IB_AW'(c.lhs_base + cnt);
    rhs_raddr   = IB_AW'(c.rhs_base + cnt);
    lhs_col_req = 1'b0;
    rhs_col_req = 1'b0;
    lhs_col_idx = cnt[HW-1:0];
    rhs_col_idx = cnt[WW-1:0];
    if (state == S_FILL) begin
      lhs_re = c.lhs_tr && (cnt < c.lhs_rows);
      rhs_re = c.rhs_tr && (cnt < c.rhs_rows);
    end else if (issue) begin
      if (c.lhs_tr) lhs_col_req = 1'b1; else lhs_re = 1'b1;
      if (c.rhs_tr) rhs_col_req = 1'b1; else rhs_re = 1'b1;
    end
  end

  // during STREAM every vector leaving a transpose unit goes into the engine
  assign eng_lhs_push = lhs_tr_valid && (state == S_STREAM || state == S_WAIT_ENG) ;
  assign eng_rhs_push = rhs_tr_valid && (state == S_STREAM || state == S_WAIT_ENG);
  assign eng_lhs_vec  = lhs_tr_vec;
  assign eng_rhs_vec  = rhs_tr_vec;
  assign eng_start    = (state == S_START);
  assign eng_k        = c.k;
  assign eng_acc_continue = c.k_continue;

  // drain routing
  assign eng_drain_req = (state == S_DRAIN);
  assign eng_drain_grp = cnt[GW-1:0];

  always_comb begin
    ob_we     = 1'b0;
    ob_wmask  = '1;
    ob_wrow   = OB_AW'(c.out_base + ADDR_W'(grp_d) * ADDR_W'(R));
    ob_wdata  = eng_drain_rows;
    ppu_valid = 1'b0;
    ppu_first = c.norm_clear && (grp_d == '0);
    ppu_rows  = eng_drain_rows;
    if (eng_drain_valid) begin
      if (c.to_ppu) ppu_valid = 1'b1;
      else          ob_we     = 1'b1;
    end else if (state == S_NORM_WAIT && !ppu_busy) begin
      ob_we          = 1'b1;
      ob_wmask       = R'(1);
      ob_wrow        = OB_AW'(c.out_base);
      ob_wdata       = '0;
      ob_wdata[0][0] = ppu_norm_sq;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      c     <= '0;
      cnt   <= '0;
      grp_d <= '0;
    end else begin
      grp_d <= eng_drain_grp;
      case (state)
        S_IDLE: if (cmd_valid) begin
          c   <= cmd;
          cnt <= '0;
          case (cmd.op)
            OP_LOAD_LHS, OP_LOAD_RHS, OP_STORE: state <= S_DMA;
            OP_GEMM:    state <= (cmd.k == '0) ? S_IDLE
                               : (cmd.lhs_tr || cmd.rhs_tr) ? S_FILL : S_START;
            OP_NORM_WR: state <= S_NORM_WAIT;
            default:    state <= S_IDLE;
          endcase
        end
        S_DMA:      if (dma_ready) state <= S_DMA_WAIT;
        S_DMA_WAIT: if (dma_done)  state <= S_IDLE;
        S_FILL: begin
          cnt <= cnt + 1'b1;
          if (cnt + 1'b1 >= fill_n) state <= S_FILL_END;
        end
        S_FILL_END: begin
          cnt   <= '0;
          state <= S_START;
        end
        S_START: state <= S_STREAM;
        S_STREAM: begin
          if (issue) cnt <= cnt + 1'b1;
          if (cnt == c.k) state <= S_WAIT_ENG;
        end
        S_WAIT_ENG: if (!eng_busy) begin
          cnt   <= '0;
          state <= c.no_drain ? S_IDLE : S_DRAIN;
        end
        S_DRAIN: begin
          cnt <= cnt + 1'b1;
          if (int'(cnt) == int'(NGRP) - 1) state <= S_DRAIN_END;
        end
        S_DRAIN_END: state <= S_IDLE;
        S_NORM_WAIT: if (!ppu_busy) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  a_tr_k_fits: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_START) |-> ((!c.lhs_tr || c.k <= ADDR_W'(PE_H)) && (!c.rhs_tr || c.k <= ADDR_W'(PE_W))));

endmodule
