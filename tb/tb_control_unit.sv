// tb_control_unit: drives the control unit with behavioural stand-ins for the
// DMA, the transpose units, the engine and the PPU, and checks the sequence
// of actions for every command type:
//  - LOAD/STORE: the DMA descriptor fields, and that the command lasts until
//    the DMA's done pulse;
//  - GEMM from buffers: k reads at lhs_base/rhs_base + step in order, one
//    engine start with the right K, reads held off while a queue is afull,
//    PE_H/R drain requests for groups 0..15, each group written to the output
//    buffer at out_base + g*R with the drained data;
//  - GEMM with both operands transposed: the fill reads, then k column reads
//    0..k-1 and no buffer reads while streaming, one transpose clear;
//  - GEMM into the PPU: every group forwarded with in_first only on the first
//    group of a norm_clear tile, nothing written to the buffer;
//  - GEMM with k_continue/no_drain: continuation flag passed on, no drain;
//  - NORM_WR: held until the PPU is idle, then one masked write of the norm.
module tb_control_unit;
  import diva_pkg::*;
  localparam int PE_H = 128, PE_W = 128, R = 8, NGRP = PE_H / R, IB_AW = 14, OB_AW = 14;

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, busy;
  diva_cmd_t cmd = '0;
  logic dma_valid, dma_ready = 1, dma_done = 0;
  dma_cmd_t dma_cmd;
  logic lhs_re, rhs_re;
  logic [IB_AW-1:0] lhs_raddr, rhs_raddr;
  logic tr_clear, lhs_mode_tr, lhs_col_req, rhs_mode_tr, rhs_col_req;
  logic [6:0] lhs_col_idx, rhs_col_idx;
  logic lhs_tr_valid = 0, rhs_tr_valid = 0;
  logic [PE_H-1:0][15:0] lhs_tr_vec = '0;
  logic [PE_W-1:0][15:0] rhs_tr_vec = '0;
  logic eng_lhs_push, eng_rhs_push, eng_lhs_afull = 0, eng_rhs_afull = 0;
  logic [PE_H-1:0][15:0] eng_lhs_vec;
  logic [PE_W-1:0][15:0] eng_rhs_vec;
  logic eng_start, eng_busy = 0, eng_drain_req, eng_drain_valid = 0;
  logic [15:0] eng_k;
  logic eng_acc_continue;
  logic [3:0] eng_drain_grp;
  logic [R-1:0][PE_W-1:0][31:0] eng_drain_rows = '0;
  logic ob_we;
  logic [R-1:0] ob_wmask;
  logic [OB_AW-1:0] ob_wrow;
  logic [R-1:0][PE_W-1:0][31:0] ob_wdata;
  logic ppu_valid, ppu_first, ppu_busy = 0;
  logic [R-1:0][PE_W-1:0][31:0] ppu_rows;
  logic [31:0] ppu_norm_sq = 32'h4120_0000;
  int checks = 0, failures = 0;

  control_unit #(.PE_H(PE_H), .PE_W(PE_W), .R(R), .IB_AW(IB_AW), .OB_AW(OB_AW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // ---------------------------------------------------- stand-in models
  // transpose units: one-clock latency in both modes
  always @(posedge clk) begin
    lhs_tr_valid <= lhs_mode_tr ? lhs_col_req : lhs_re;
    rhs_tr_valid <= rhs_mode_tr ? rhs_col_req : rhs_re;
    lhs_tr_vec[0] <= lhs_mode_tr ? 16'(lhs_col_idx) : 16'(lhs_raddr);
    rhs_tr_vec[0] <= rhs_mode_tr ? 16'(rhs_col_idx) : 16'(rhs_raddr);
  end
  // engine: busy from start until K vectors have been pushed
  int eng_left = 0, pushes = 0;
  always @(posedge clk) begin
    if (eng_start) begin eng_busy <= 1; eng_left = eng_k; end
    if (eng_lhs_push) begin
      pushes++;
      eng_left--;
      if (eng_left == 0) eng_busy <= 0;
    end
    eng_drain_valid <= eng_drain_req;
    if (eng_drain_req) for (int r = 0; r < R; r++) eng_drain_rows[r][0] <= 32'(eng_drain_grp) * 100 + 32'(r);
  end
  // DMA: done a few clocks after acceptance
  int dma_cnt = -1;
  always @(posedge clk) begin
    dma_done <= 0;
    if (dma_valid && dma_ready) dma_cnt = 5;
    else if (dma_cnt > 0) dma_cnt--;
    else if (dma_cnt == 0) begin dma_done <= 1; dma_cnt = -1; end
  end

  // ---------------------------------------------------- event recorders
  int lre [$], rre [$], lcol [$], rcol [$], drains [$], obrows [$], ppufirst [$];
  int starts = 0, clears = 0, dmas = 0, afull_violations = 0, ob_data_err = 0, norm_writes = 0;
  logic [OB_AW-1:0] norm_row;
  logic [31:0] norm_val;
  bit busy_during_ppu = 0;
  always @(posedge clk) if (rst_n) begin
    if (lhs_re) lre.push_back(int'(lhs_raddr));
    if (rhs_re) rre.push_back(int'(rhs_raddr));
    if (lhs_col_req) lcol.push_back(int'(lhs_col_idx));
    if (rhs_col_req) rcol.push_back(int'(rhs_col_idx));
    if (eng_drain_req) drains.push_back(int'(eng_drain_grp));
    if (eng_start) starts++;
    if (tr_clear) clears++;
    if (dma_valid && dma_ready) dmas++;
    if ((eng_lhs_afull || eng_rhs_afull) && dut.state == dut.S_STREAM && (lhs_col_req || (lhs_re && !lhs_mode_tr)))
      afull_violations++;
    if (ob_we && ob_wmask == '1) begin
      obrows.push_back(int'(ob_wrow));
      for (int r = 0; r < R; r++)
        if (ob_wdata[r][0] != eng_drain_rows[r][0]) ob_data_err++;
    end
    if (ob_we && ob_wmask != '1) begin
      norm_writes++;
      norm_row = ob_wrow;
      norm_val = ob_wdata[0][0];
      if (ppu_busy) busy_during_ppu = 1;
    end
    if (ppu_valid) ppufirst.push_back(int'(ppu_first));
  end

  task automatic clear_rec();
    lre.delete(); rre.delete(); lcol.delete(); rcol.delete(); drains.delete();
    obrows.delete(); ppufirst.delete(); starts = 0; clears = 0; dmas = 0; pushes = 0;
  endtask

  task automatic run(input diva_cmd_t c);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd = c; cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0;
    while (busy) @(negedge clk);
  endtask

  initial begin
    diva_cmd_t c;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // LOAD_RHS
    clear_rec();
    c = '0; c.op = OP_LOAD_RHS; c.dram_addr = 1234; c.buf_addr = 77; c.len = 9;
    fork
      run(c);
      begin
        @(posedge dma_valid);
        #1;
        chk(dma_cmd.store == 0 && dma_cmd.to_rhs == 1 && dma_cmd.dram_addr == 1234 &&
            dma_cmd.buf_addr == 77 && dma_cmd.len == 9, "load descriptor");
        @(posedge dma_done);
        chk(busy, "busy until DMA done");
      end
    join
    chk(dmas == 1, "one DMA descriptor");
    // STORE
    clear_rec();
    c = '0; c.op = OP_STORE; c.dram_addr = 55; c.buf_addr = 16; c.len = 3;
    fork
      run(c);
      begin
        @(posedge dma_valid);
        #1;
        chk(dma_cmd.store == 1 && dma_cmd.dram_addr == 55 && dma_cmd.buf_addr == 16, "store descriptor");
      end
    join

    // GEMM from buffers into the output buffer, with afull back-pressure
    clear_rec();
    c = '0; c.op = OP_GEMM; c.lhs_base = 40; c.rhs_base = 900; c.k = 10; c.out_base = 256;
    fork
      run(c);
      begin
        @(posedge eng_start);
        repeat (3) @(negedge clk);
        eng_lhs_afull = 1;
        repeat (4) @(negedge clk);
        eng_lhs_afull = 0;
      end
    join
    chk(starts == 1 && eng_k == 10, "one start with K");
    chk(clears == 1, "transpose clear on accept");
    chk(lre.size() == 10 && rre.size() == 10, "k buffer reads");
    for (int i = 0; i < lre.size(); i++) chk(lre[i] == 40 + i && rre[i] == 900 + i, "read addresses in order");
    chk(lcol.size() == 0 && rcol.size() == 0, "no column reads");
    chk(pushes == 10, "k pushes");
    chk(afull_violations == 0, "no issue while afull");
    chk(drains.size() == NGRP, "PE_H/R drain cycles");
    for (int g = 0; g < drains.size(); g++) chk(drains[g] == g, "drain group order");
    chk(obrows.size() == NGRP, "all groups written");
    for (int g = 0; g < obrows.size(); g++) chk(obrows[g] == 256 + g * R, "output row address");
    chk(ob_data_err == 0, "drained data written");
    chk(ppufirst.size() == 0, "nothing to PPU");

    // GEMM with both operands transposed, into the PPU, new example
    clear_rec();
    c = '0; c.op = OP_GEMM; c.lhs_base = 1000; c.rhs_base = 2000; c.k = 7;
    c.lhs_tr = 1; c.lhs_rows = 100; c.rhs_tr = 1; c.rhs_rows = 120; c.to_ppu = 1; c.norm_clear = 1;
    run(c);
    chk(lre.size() == 100 && rre.size() == 120, "fill reads");
    for (int i = 0; i < lre.size(); i++) chk(lre[i] == 1000 + i, "lhs fill address");
    for (int i = 0; i < rre.size(); i++) chk(rre[i] == 2000 + i, "rhs fill address");
    chk(lcol.size() == 7 && rcol.size() == 7, "k column reads");
    for (int i = 0; i < lcol.size(); i++) chk(lcol[i] == i && rcol[i] == i, "column order");
    chk(pushes == 7, "k pushes (transposed)");
    chk(ppufirst.size() == NGRP, "all groups to PPU");
    for (int g = 0; g < ppufirst.size(); g++) chk(ppufirst[g] == (g == 0), "in_first on first group only");
    chk(obrows.size() == 0, "nothing to buffer");

    // GEMM into the PPU, accumulating
    clear_rec();
    c.lhs_tr = 0; c.rhs_tr = 0; c.norm_clear = 0; c.k = 2;
    run(c);
    chk(ppufirst.size() == NGRP, "accumulating groups to PPU");
    foreach (ppufirst[g]) chk(ppufirst[g] == 0, "no in_first when accumulating");

    // GEMM continuing a previous one, results left in the array
    clear_rec();
    c = '0; c.op = OP_GEMM; c.k = 4; c.k_continue = 1; c.no_drain = 1;
    fork
      run(c);
      begin @(posedge eng_start); #1; chk(eng_acc_continue, "acc_continue passed to engine"); end
    join
    chk(starts == 1 && pushes == 4, "continued tile streamed");
    chk(drains.size() == 0 && obrows.size() == 0 && ppufirst.size() == 0, "no drain with no_drain");

    // NORM_WR waits for the PPU
    c = '0; c.op = OP_NORM_WR; c.out_base = 40;
    ppu_busy = 1;
    fork
      run(c);
      begin repeat (6) @(negedge clk); ppu_busy = 0; end
    join
    chk(norm_writes == 1, "one norm write");
    chk(!busy_during_ppu, "norm write after PPU idle");
    chk(norm_row == 40 && norm_val == 32'h4120_0000, "norm row and value");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
