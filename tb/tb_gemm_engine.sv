// tb_gemm_engine: runs outer-product tiles through an 8 x 8 engine (R = 2)
// and compares every drained element with a reference that accumulates the
// BF16 products in step order. Tiles with K = 1, 3, 17 and 40 are fed once
// back to back, where the engine must take exactly K busy cycles (one step per
// clock whatever K is), and once with random gaps, where it must stall
// without losing steps. A K = 30 product is also run as three starts of 12,
// 10 and 8 steps with acc_continue, drained only at the end. Draining must return R rows per clock, PE_H/R clocks
// per tile, one clock after each request.
module tb_gemm_engine;
  import tb_fp_pkg::*;
  localparam int PE_H = 8, PE_W = 8, R = 2, NGRP = PE_H / R;

  logic clk = 0, rst_n = 0;
  logic lhs_push = 0, rhs_push = 0, lhs_afull, rhs_afull;
  logic [PE_H-1:0][15:0] lhs_vec = '0;
  logic [PE_W-1:0][15:0] rhs_vec = '0;
  logic start = 0, busy, done, stall, acc_continue = 0;
  logic [31:0] Cprev [PE_H][PE_W];
  logic [15:0] k_steps = 0;
  logic drain_req = 0, drain_valid;
  logic [$clog2(NGRP)-1:0] drain_grp = 0;
  logic [R-1:0][PE_W-1:0][31:0] drain_rows;
  int checks = 0, failures = 0, stalls = 0;

  gemm_engine #(.PE_H(PE_H), .PE_W(PE_W), .R(R), .QDEPTH(4)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (stall) stalls++;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic run_tile(input int K, input bit gaps, input bit cont = 0, input bit drain = 1);
    logic [15:0] A [PE_H][];
    logic [15:0] B [][];
    logic [31:0] C [PE_H][PE_W];
    int sent, busy_cycles, drains;
    for (int i = 0; i < PE_H; i++) begin
      A[i] = new[K];
      for (int k = 0; k < K; k++) A[i][k] = rand_bf16(115, 135);
    end
    B = new[K];
    for (int k = 0; k < K; k++) begin
      B[k] = new[PE_W];
      for (int j = 0; j < PE_W; j++) B[k][j] = rand_bf16(115, 135);
    end
    for (int i = 0; i < PE_H; i++)
      for (int j = 0; j < PE_W; j++)
        for (int k = 0; k < K; k++) begin
          logic [31:0] p;
          p = ref_mul({A[i][k], 16'h0}, {B[k][j], 16'h0});
          C[i][j] = (k == 0 && !cont) ? p : ref_add((k == 0) ? Cprev[i][j] : C[i][j], p);
        end
    // start and stream
    @(negedge clk);
    start = 1; k_steps = 16'(K); acc_continue = cont;
    sent = 0; busy_cycles = 0;
    fork
      begin
        while (sent < K) begin
          lhs_push = 0; rhs_push = 0;
          if (!lhs_afull && !rhs_afull && !(gaps && ($urandom % 3 == 0))) begin
            for (int i = 0; i < PE_H; i++) lhs_vec[i] = A[i][sent];
            for (int j = 0; j < PE_W; j++) rhs_vec[j] = B[sent][j];
            lhs_push = 1; rhs_push = 1;
            sent++;
          end
          @(negedge clk);
          start = 0;
        end
        lhs_push = 0; rhs_push = 0;
      end
      begin
        @(posedge clk);
        #1;
        while (busy) begin
          busy_cycles++;
          @(posedge clk);
          #1;
        end
      end
    join
    if (!gaps) chk(busy_cycles == K, $sformatf("K=%0d took %0d busy cycles", K, busy_cycles));
    Cprev = C;
    if (!drain) return;
    // drain
    @(negedge clk);
    drains = 0;
    for (int g = 0; g < NGRP; g++) begin
      drain_req = 1;
      drain_grp = g[$clog2(NGRP)-1:0];
      @(posedge clk);
      #1;
      chk(drain_valid, "drain_valid at the clock edge after the request");
      for (int r = 0; r < R; r++)
        for (int j = 0; j < PE_W; j++) begin
          checks++;
          if (drain_rows[r][j] !== C[g*R + r][j]) begin
            failures++;
            $display("FAIL K=%0d C[%0d][%0d] got %h exp %h", K, g*R + r, j,
                     drain_rows[r][j], C[g*R + r][j]);
          end
        end
      drains++;
      @(negedge clk);
    end
    drain_req = 0;
    chk(drains == PE_H / R, "PE_H/R drain cycles");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    run_tile(1, 0);
    run_tile(3, 0);
    run_tile(17, 0);
    run_tile(40, 0);
    run_tile(5, 1);
    run_tile(33, 1);
    // K = 30 split into 12 + 10 + 8 with the accumulators kept in between
    run_tile(12, 0, 0, 0);
    run_tile(10, 1, 1, 0);
    run_tile(8, 0, 1, 1);
    chk(stalls > 0, "stalls observed with gaps");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
