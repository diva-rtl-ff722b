// tb_diva_mid: the end-to-end test of tb_diva_top at an intermediate size:
// a 32 x 32 PE array with the default drain width R = 8 (so the PPU has its
// full eight row trees and a three-level combine tree), 512-line buffers.
// The same command stream -- operand loads, two per-example tiles
// accumulated into one squared norm, one tile with both operands transposed
// on chip, one per-batch tile split over two GEMM commands into the output
// buffer, and the store -- with all results compared in DRAM against the
// reference, each mechanism counted (one that never happens is a failure),
// and the K-step compute time of every tile checked. The default 128 x 128
// configuration elaborates to more generated code than is practical to
// simulate, so this is the largest end-to-end size exercised.
module tb_diva_mid;
  import diva_pkg::*;
  import tb_fp_pkg::*;

  localparam int PE_H = 32, PE_W = 32, R = 8, IB_DEPTH = 512, OB_ROWS = 512;
  localparam int DW = PE_H * 16, NGRP = PE_H / R, BEATS = PE_W * 32 / DW;
  localparam int K0 = 5, K1 = 3, KT = 6, KB = 20, KB1 = 12;
  localparam int RHS_DRAM = 64, OUT_DRAM = 128, OUT_ROW_C = 2 * R, N_OUT_ROWS = OUT_ROW_C + PE_H;

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, busy;
  diva_cmd_t cmd = '0;
  logic [31:0] norm_sq;
  logic mem_req_valid, mem_req_ready, mem_req_write, mem_rsp_valid;
  logic [31:0] mem_req_addr;
  logic [DW-1:0] mem_req_wdata, mem_rsp_data;
  int checks = 0, failures = 0;

  diva_top #(.PE_H(PE_H), .PE_W(PE_W), .R(R), .IB_DEPTH(IB_DEPTH), .OB_ROWS(OB_ROWS)) u_dut (.*);

  dram_model #(.DW(DW), .WORDS(256), .LATENCY(100), .RANDOM_STALL(1)) u_dram (
    .clk, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_write(mem_req_write),
    .req_addr(mem_req_addr), .req_wdata(mem_req_wdata),
    .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- monitors
  int n_load = 0, n_store = 0, n_lhs_tr = 0, n_rhs_tr = 0, n_stall = 0;
  int n_to_ppu = 0, n_to_buf = 0, n_ppu_accum = 0, n_ppu_first = 0, n_norm_wr = 0;
  int fire_cycles = 0, n_continue = 0;
  always @(posedge clk) if (rst_n) begin
    if (u_dut.u_dma.lhs_we || u_dut.u_dma.rhs_we) n_load++;
    if (mem_req_valid && mem_req_ready && mem_req_write) n_store++;
    if (u_dut.u_lhs_tr.col_req && u_dut.u_lhs_tr.mode_tr) n_lhs_tr++;
    if (u_dut.u_rhs_tr.col_req && u_dut.u_rhs_tr.mode_tr) n_rhs_tr++;
    if (u_dut.u_gemm.stall) n_stall++;
    if (u_dut.u_gemm.fire) fire_cycles++;
    if (u_dut.u_gemm.start && u_dut.u_gemm.acc_continue) n_continue++;
    if (u_dut.ppu_valid) begin
      n_to_ppu++;
      if (u_dut.ppu_first) n_ppu_first++;
      else n_ppu_accum++;
    end
    if (u_dut.ob_we && u_dut.ob_wmask == '1) n_to_buf++;
    if (u_dut.ob_we && u_dut.ob_wmask != '1) n_norm_wr++;
  end

  // ------------------------------------------------------------- reference
  typedef logic [15:0] bf_t;
  bf_t A0 [PE_H][K0], A1 [PE_H][K1], AT [PE_H][KT], AB [PE_H][KB];
  bf_t B0 [K0][PE_W], B1 [K1][PE_W], BT [KT][PE_W], BB [KB][PE_W];
  logic [31:0] C0 [PE_H][PE_W], C1 [PE_H][PE_W], CT [PE_H][PE_W], CB [PE_H][PE_W];

  function automatic logic [31:0] dot(input bf_t a [], input bf_t b []);
    logic [31:0] r, p;
    for (int k = 0; k < a.size(); k++) begin
      p = ref_mul({a[k], 16'h0}, {b[k], 16'h0});
      r = (k == 0) ? p : ref_add(r, p);
    end
    return r;
  endfunction

  // squared norm contribution of one tile, in the order the PPU adds it
  function automatic logic [31:0] tile_norm(input logic [31:0] C [PE_H][PE_W],
                                            input logic [31:0] acc_in, input bit fresh);
    logic [31:0] sq [], rs [], acc;
    sq = new[PE_W];
    rs = new[R];
    acc = acc_in;
    for (int g = 0; g < NGRP; g++) begin
      for (int r = 0; r < R; r++) begin
        for (int j = 0; j < PE_W; j++) sq[j] = ref_mul(C[g*R + r][j], C[g*R + r][j]);
        rs[r] = ref_tree(sq, PE_W);
      end
      acc = (fresh && g == 0) ? ref_tree(rs, R) : ref_add(acc, ref_tree(rs, R));
    end
    return acc;
  endfunction

  // ------------------------------------------------------------ stimulus
  task automatic issue(input diva_cmd_t c);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd = c; cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0;
  endtask

  task automatic wait_idle();
    @(negedge clk);
    while (busy || cmd_valid) @(negedge clk);
  endtask

  function automatic diva_cmd_t gemm(input int lb, input int rb, input int k, input bit ltr, input bit rtr,
                                     input bit ppu, input bit clr, input int ob);
    diva_cmd_t c = '0;
    c.op = OP_GEMM; c.lhs_base = 16'(lb); c.rhs_base = 16'(rb); c.k = 16'(k);
    c.lhs_tr = ltr; c.lhs_rows = 16'(PE_H); c.rhs_tr = rtr; c.rhs_rows = 16'(PE_W);
    c.to_ppu = ppu; c.norm_clear = clr; c.out_base = 16'(ob);
    return c;
  endfunction

  // K-cycle rule: a tile of K steps keeps the engine busy K clocks once data flows
  task automatic gemm_timed(input diva_cmd_t c);
    int f0;
    f0 = fire_cycles;
    issue(c);
    wait_idle();
    checks++;
    if (fire_cycles - f0 != int'(c.k)) begin
      failures++; $display("FAIL tile took %0d steps, expected %0d", fire_cycles - f0, c.k);
    end
  endtask

  initial begin
    logic [DW-1:0] line;
    logic [31:0] n0, n1;
    diva_cmd_t c;
    int l;
    bf_t av [], bv [];
    // random operands
    foreach (A0[i, k]) A0[i][k] = rand_bf16(115, 135);
    foreach (A1[i, k]) A1[i][k] = rand_bf16(115, 135);
    foreach (AT[i, k]) AT[i][k] = rand_bf16(115, 135);
    foreach (AB[i, k]) AB[i][k] = rand_bf16(115, 135);
    foreach (B0[k, j]) B0[k][j] = rand_bf16(115, 135);
    foreach (B1[k, j]) B1[k][j] = rand_bf16(115, 135);
    foreach (BT[k, j]) BT[k][j] = rand_bf16(115, 135);
    foreach (BB[k, j]) BB[k][j] = rand_bf16(115, 135);
    // LHS image: columns of A0, A1, then rows of AT (transposed on chip), columns of AB
    l = 0;
    for (int k = 0; k < K0; k++) begin for (int i = 0; i < PE_H; i++) line[i*16 +: 16] = A0[i][k]; u_dram.mem[l++] = line; end
    for (int k = 0; k < K1; k++) begin for (int i = 0; i < PE_H; i++) line[i*16 +: 16] = A1[i][k]; u_dram.mem[l++] = line; end
    for (int i = 0; i < PE_H; i++) begin line = '0; for (int k = 0; k < KT; k++) line[k*16 +: 16] = AT[i][k]; u_dram.mem[l++] = line; end
    for (int k = 0; k < KB; k++) begin for (int i = 0; i < PE_H; i++) line[i*16 +: 16] = AB[i][k]; u_dram.mem[l++] = line; end
    // RHS image: rows of B0, B1, columns of BT (transposed on chip), rows of BB
    l = RHS_DRAM;
    for (int k = 0; k < K0; k++) begin for (int j = 0; j < PE_W; j++) line[j*16 +: 16] = B0[k][j]; u_dram.mem[l++] = line; end
    for (int k = 0; k < K1; k++) begin for (int j = 0; j < PE_W; j++) line[j*16 +: 16] = B1[k][j]; u_dram.mem[l++] = line; end
    for (int j = 0; j < PE_W; j++) begin line = '0; for (int k = 0; k < KT; k++) line[k*16 +: 16] = BT[k][j]; u_dram.mem[l++] = line; end
    for (int k = 0; k < KB; k++) begin for (int j = 0; j < PE_W; j++) line[j*16 +: 16] = BB[k][j]; u_dram.mem[l++] = line; end
    // reference results
    av = new[0]; bv = new[0];
    for (int i = 0; i < PE_H; i++)
      for (int j = 0; j < PE_W; j++) begin
        av = new[K0]; bv = new[K0]; for (int k = 0; k < K0; k++) begin av[k] = A0[i][k]; bv[k] = B0[k][j]; end C0[i][j] = dot(av, bv);
        av = new[K1]; bv = new[K1]; for (int k = 0; k < K1; k++) begin av[k] = A1[i][k]; bv[k] = B1[k][j]; end C1[i][j] = dot(av, bv);
        av = new[KT]; bv = new[KT]; for (int k = 0; k < KT; k++) begin av[k] = AT[i][k]; bv[k] = BT[k][j]; end CT[i][j] = dot(av, bv);
        av = new[KB]; bv = new[KB]; for (int k = 0; k < KB; k++) begin av[k] = AB[i][k]; bv[k] = BB[k][j]; end CB[i][j] = dot(av, bv);
      end
    n0 = tile_norm(C1, tile_norm(C0, 32'h0, 1), 0);
    n1 = tile_norm(CT, 32'h0, 1);

    repeat (3) @(posedge clk);
    rst_n = 1;
    // 1. operand loads
    c = '0; c.op = OP_LOAD_LHS; c.dram_addr = 0; c.buf_addr = 0; c.len = 16'(K0 + K1 + PE_H + KB);
    issue(c);
    c = '0; c.op = OP_LOAD_RHS; c.dram_addr = RHS_DRAM; c.buf_addr = 0; c.len = 16'(K0 + K1 + PE_W + KB);
    issue(c);
    wait_idle();
    // 2. example 0, two layers
    gemm_timed(gemm(0, 0, K0, 0, 0, 1, 1, 0));
    gemm_timed(gemm(K0, K0, K1, 0, 0, 1, 0, 0));
    c = '0; c.op = OP_NORM_WR; c.out_base = 0;
    issue(c);
    wait_idle();
    checks++;
    if (norm_sq !== n0) begin failures++; $display("FAIL norm example 0 got %h exp %h", norm_sq, n0); end
    // 3. example 1, transposed operands
    gemm_timed(gemm(K0 + K1, K0 + K1, KT, 1, 1, 1, 1, 0));
    c = '0; c.op = OP_NORM_WR; c.out_base = 16'(R);
    issue(c);
    // 4. per-batch gradient into the output buffer
    // (split in two GEMM commands: KB1 steps left in the array, then the rest)
    c = gemm(K0 + K1 + PE_H, K0 + K1 + PE_W, KB1, 0, 0, 0, 0, OUT_ROW_C);
    c.no_drain = 1;
    gemm_timed(c);
    c = gemm(K0 + K1 + PE_H + KB1, K0 + K1 + PE_W + KB1, KB - KB1, 0, 0, 0, 0, OUT_ROW_C);
    c.k_continue = 1;
    gemm_timed(c);
    // 5. store
    c = '0; c.op = OP_STORE; c.dram_addr = OUT_DRAM; c.buf_addr = 0; c.len = 16'(N_OUT_ROWS);
    issue(c);
    wait_idle();
    repeat (3) @(negedge clk);

    // ---------------------------------------------------------- check DRAM
    begin
      logic [BEATS*DW-1:0] row;
      for (int r = 0; r < N_OUT_ROWS; r++) begin
        for (int b = 0; b < BEATS; b++) row[b*DW +: DW] = u_dram.mem[OUT_DRAM + r*BEATS + b];
        if (r == 0 || r == R) begin
          checks++;
          if (row[31:0] !== (r == 0 ? n0 : n1) || row[BEATS*DW-1:32] != '0) begin
            failures++; $display("FAIL stored norm row %0d: %h exp %h", r, row[31:0], r == 0 ? n0 : n1);
          end
        end else if (r >= OUT_ROW_C) begin
          for (int j = 0; j < PE_W; j++) begin
            checks++;
            if (row[j*32 +: 32] !== CB[r - OUT_ROW_C][j]) begin
              failures++;
              $display("FAIL C[%0d][%0d] got %h exp %h", r - OUT_ROW_C, j, row[j*32 +: 32], CB[r - OUT_ROW_C][j]);
            end
          end
        end
      end
    end
    // ------------------------------------------------------ mechanism census
    $display("mechanisms: dma_load_beats=%0d dma_store_beats=%0d lhs_transposed=%0d rhs_transposed=%0d engine_stalls=%0d drain_to_ppu=%0d drain_to_buffer=%0d ppu_accumulate=%0d ppu_new_example=%0d norm_writes=%0d k_split_continuations=%0d",
             n_load, n_store, n_lhs_tr, n_rhs_tr, n_stall, n_to_ppu, n_to_buf, n_ppu_accum, n_ppu_first, n_norm_wr, n_continue);
    checks += 11;
    if (n_continue  != 1) begin failures++; $display("FAIL K-split continuation count"); end
    if (n_load      != 2 * (K0 + K1 + PE_H + KB)) begin failures++; $display("FAIL load beats"); end
    if (n_store     != N_OUT_ROWS * BEATS) begin failures++; $display("FAIL store beats"); end
    if (n_lhs_tr    != KT) begin failures++; $display("FAIL lhs transpose count"); end
    if (n_rhs_tr    != KT) begin failures++; $display("FAIL rhs transpose count"); end
    if (n_stall     == 0) begin failures++; $display("FAIL no engine stall seen"); end
    if (n_to_ppu    != 3 * NGRP) begin failures++; $display("FAIL drain-to-PPU count"); end
    if (n_to_buf    != NGRP) begin failures++; $display("FAIL drain-to-buffer count"); end
    if (n_ppu_accum == 0) begin failures++; $display("FAIL no PPU accumulation"); end
    if (n_ppu_first != 2) begin failures++; $display("FAIL PPU restarts"); end
    if (n_norm_wr   != 2) begin failures++; $display("FAIL norm writes"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
