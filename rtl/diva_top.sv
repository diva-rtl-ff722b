// diva_top: the DiVa accelerator for differentially private training.
//
// DP-SGD needs, for every training example, the weight gradient of that
// example alone and its L2 norm. The per-example gradient GEMMs have a tiny
// inner dimension K, which starves systolic arrays, and the norms are a
// memory-bound reduction. DiVa answers both: an outer-product GEMM engine whose
// PE_H x PE_W MACs are busy every cycle whatever K is, and a post-processing
// unit (PPU) that reduces the output tile to a squared norm while it is being
// drained from the array, so per-example gradients never leave the chip.
//
// Blocks and connections:
//   DRAM port -> dma_unit -> (demux) -> LHS / RHS input_buffer
//   input_buffer -> transpose_unit -> control_unit -> gemm_engine queues
//   gemm_engine drain (R rows/clock) -> control_unit -> output_buffer or ppu
//   ppu squared norm -> control_unit -> output_buffer
//   output_buffer -> dma_unit -> DRAM port
// The host supplies commands (diva_cmd_t, see diva_pkg) on a valid/ready
// port; norm_sq shows the PPU accumulator. The DRAM itself is outside the
// chip: the mem_* port issues one beat request per clock (valid/ready) and
// expects read data back in request order.
// The engine's done and stall outputs are not needed by the control unit
// (it watches busy); they are left for observation in simulation.
module diva_top
  import diva_pkg::*;
#(
  parameter int unsigned PE_H     = diva_pkg::DEF_PE_H,
  parameter int unsigned PE_W     = diva_pkg::DEF_PE_W,
  parameter int unsigned R        = diva_pkg::DEF_R,
  parameter int unsigned IB_DEPTH = diva_pkg::DEF_IB_DEPTH,
  parameter int unsigned OB_ROWS  = diva_pkg::DEF_OB_ROWS,
  parameter int unsigned QDEPTH   = diva_pkg::DEF_QDEPTH,
  localparam int unsigned DW      = PE_H * 16,
  localparam int unsigned IB_AW   = $clog2(IB_DEPTH),
  localparam int unsigned OB_AW   = $clog2(OB_ROWS),
  localparam int unsigned NGRP    = PE_H / R,
  localparam int unsigned GW      = (NGRP > 1) ? $clog2(NGRP) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               cmd_valid,
  output logic               cmd_ready,
  input  diva_cmd_t          cmd,
  output logic               busy,
  output logic [31:0]        norm_sq,
  // DRAM
  output logic               mem_req_valid,
  input  logic               mem_req_ready,
  output logic               mem_req_write,
  output logic [DADDR_W-1:0] mem_req_addr,
  output logic [DW-1:0]      mem_req_wdata,
  input  logic               mem_rsp_valid,
  input  logic [DW-1:0]      mem_rsp_data
);

  // DMA <-> control
  logic     dma_valid, dma_ready, dma_done;
  dma_cmd_t dma_cmd;
  // input buffers
  logic                   lhs_we, rhs_we;
  logic [IB_AW-1:0]       ib_waddr;
  logic [DW-1:0]          ib_wdata;
  logic                   lhs_re, rhs_re, lhs_rvalid, rhs_rvalid;
  logic [IB_AW-1:0]       lhs_raddr, rhs_raddr;
  logic [PE_H-1:0][15:0]  lhs_rdata;
  logic [PE_W-1:0][15:0]  rhs_rdata;
  // transpose units
  logic                   tr_clear, lhs_mode_tr, rhs_mode_tr;
  logic                   lhs_col_req, rhs_col_req, lhs_tr_valid, rhs_tr_valid;
  logic [$clog2(PE_H)-1:0] lhs_col_idx;
  logic [$clog2(PE_W)-1:0] rhs_col_idx;
  logic [PE_H-1:0][15:0]  lhs_tr_vec;
  logic [PE_W-1:0][15:0]  rhs_tr_vec;
  // engine
  logic                   eng_lhs_push, eng_rhs_push, eng_lhs_afull, eng_rhs_afull;
  logic [PE_H-1:0][15:0]  eng_lhs_vec;
  logic [PE_W-1:0][15:0]  eng_rhs_vec;
  logic                   eng_start, eng_busy, eng_done, eng_stall;
  logic [15:0]            eng_k;
  logic                   eng_acc_continue;
  logic                   eng_drain_req, eng_drain_valid;
  logic [GW-1:0]          eng_drain_grp;
  logic [R-1:0][PE_W-1:0][31:0] eng_drain_rows;
  // output buffer
  logic                   ob_we, ob_re, ob_rvalid;
  logic [R-1:0]           ob_wmask;
  logic [OB_AW-1:0]       ob_wrow, ob_raddr;
  logic [R-1:0][PE_W-1:0][31:0] ob_wdata;
  logic [PE_W-1:0][31:0]  ob_rdata;
  // PPU
  logic                   ppu_valid, ppu_first, ppu_busy;
  logic [R-1:0][PE_W-1:0][31:0] ppu_rows;

  dma_unit #(.PE_H(PE_H), .PE_W(PE_W), .DW(DW), .IB_AW(IB_AW), .OB_AW(OB_AW)) u_dma (
    .clk, .rst_n,
    .cmd_valid(dma_valid), .cmd_ready(dma_ready), .cmd(dma_cmd), .done(dma_done),
    .mem_req_valid, .mem_req_ready, .mem_req_write, .mem_req_addr, .mem_req_wdata,
    .mem_rsp_valid, .mem_rsp_data,
    .lhs_we, .rhs_we, .ib_waddr, .ib_wdata,
    .ob_re, .ob_raddr, .ob_rvalid, .ob_rdata(ob_rdata));

  input_buffer #(.LANES(PE_H), .DEPTH(IB_DEPTH)) u_lhs_buf (
    .clk, .rst_n, .we(lhs_we), .waddr(ib_waddr), .wdata(ib_wdata),
    .re(lhs_re), .raddr(lhs_raddr), .rvalid(lhs_rvalid), .rdata(lhs_rdata));

  input_buffer #(.LANES(PE_W), .DEPTH(IB_DEPTH)) u_rhs_buf (
    .clk, .rst_n, .we(rhs_we), .waddr(ib_waddr), .wdata(ib_wdata),
    .re(rhs_re), .raddr(rhs_raddr), .rvalid(rhs_rvalid), .rdata(rhs_rdata));

  transpose_unit #(.LANES(PE_H)) u_lhs_tr (
    .clk, .rst_n, .clear(tr_clear), .mode_tr(lhs_mode_tr),
    .in_valid(lhs_rvalid), .in_vec(lhs_rdata),
    .col_req(lhs_col_req), .col_idx(lhs_col_idx),
    .out_valid(lhs_tr_valid), .out_vec(lhs_tr_vec));

  transpose_unit #(.LANES(PE_W)) u_rhs_tr (
    .clk, .rst_n, .clear(tr_clear), .mode_tr(rhs_mode_tr),
    .in_valid(rhs_rvalid), .in_vec(rhs_rdata),
    .col_req(rhs_col_req), .col_idx(rhs_col_idx),
    .out_valid(rhs_tr_valid), .out_vec(rhs_tr_vec));

  control_unit #(.PE_H(PE_H), .PE_W(PE_W), .R(R), .IB_AW(IB_AW), .OB_AW(OB_AW)) u_ctrl (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd, .busy,
    .dma_valid, .dma_ready, .dma_cmd, .dma_done,
    .lhs_re, .lhs_raddr, .rhs_re, .rhs_raddr,
    .tr_clear, .lhs_mode_tr, .lhs_col_req, .lhs_col_idx, .lhs_tr_valid, .lhs_tr_vec,
    .rhs_mode_tr, .rhs_col_req, .rhs_col_idx, .rhs_tr_valid, .rhs_tr_vec,
    .eng_lhs_push, .eng_lhs_vec, .eng_lhs_afull,
    .eng_rhs_push, .eng_rhs_vec, .eng_rhs_afull,
    .eng_start, .eng_k, .eng_acc_continue, .eng_busy,
    .eng_drain_req, .eng_drain_grp, .eng_drain_valid, .eng_drain_rows,
    .ob_we, .ob_wmask, .ob_wrow, .ob_wdata,
    .ppu_valid, .ppu_first, .ppu_rows, .ppu_busy, .ppu_norm_sq(norm_sq));

  gemm_engine #(.PE_H(PE_H), .PE_W(PE_W), .R(R), .QDEPTH(QDEPTH)) u_gemm (
    .clk, .rst_n,
    .lhs_push(eng_lhs_push), .lhs_vec(eng_lhs_vec), .lhs_afull(eng_lhs_afull),
    .rhs_push(eng_rhs_push), .rhs_vec(eng_rhs_vec), .rhs_afull(eng_rhs_afull),
    .start(eng_start), .k_steps(eng_k), .acc_continue(eng_acc_continue), .busy(eng_busy), .done(eng_done), .stall(eng_stall),
    .drain_req(eng_drain_req), .drain_grp(eng_drain_grp),
    .drain_valid(eng_drain_valid), .drain_rows(eng_drain_rows));

  output_buffer #(.R(R), .PE_W(PE_W), .ROWS(OB_ROWS)) u_obuf (
    .clk, .rst_n, .we(ob_we), .wmask(ob_wmask), .wrow(ob_wrow), .wdata(ob_wdata),
    .re(ob_re), .raddr(ob_raddr), .rvalid(ob_rvalid), .rdata(ob_rdata));

  ppu #(.R(R), .PE_W(PE_W)) u_ppu (
    .clk, .rst_n, .in_valid(ppu_valid), .in_first(ppu_first), .in_rows(ppu_rows),
    .norm_sq, .busy(ppu_busy));

  initial assert (PE_H == PE_W)
    else $error("diva_top: one DRAM beat carries one LHS or one RHS line, so PE_H must equal PE_W");

endmodule
