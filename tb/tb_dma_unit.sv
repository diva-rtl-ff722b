// tb_dma_unit: runs the DMA unit against the DRAM model (100-clock latency,
// random back-pressure) and a model of the output buffer's read port.
// Checks that loads write every beat, in order, to the right input buffer and
// line, that loads issue their requests back to back (a 64-line load finishes
// within 64 + latency + a few clocks when the DRAM does not stall), and that
// stores write each 4096-bit output row as two beats at consecutive DRAM
// addresses.
module tb_dma_unit;
  import diva_pkg::*;
  localparam int DW = 2048, PE_W = 128, IB_AW = 14, OB_AW = 14, LATENCY = 100;

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, done;
  dma_cmd_t cmd = '0;
  logic mem_req_valid, mem_req_ready, mem_req_write, mem_rsp_valid;
  logic [31:0] mem_req_addr;
  logic [DW-1:0] mem_req_wdata, mem_rsp_data;
  logic lhs_we, rhs_we, ob_re, ob_rvalid = 0;
  logic [IB_AW-1:0] ib_waddr;
  logic [DW-1:0] ib_wdata;
  logic [OB_AW-1:0] ob_raddr;
  logic [PE_W*32-1:0] ob_rdata = '0;
  int checks = 0, failures = 0;
  logic [DW-1:0] lhs_seen [int], rhs_seen [int];
  logic [PE_W*32-1:0] obm [int];
  bit stall_mode = 0;

  dma_unit #(.PE_H(128), .PE_W(PE_W), .DW(DW), .IB_AW(IB_AW), .OB_AW(OB_AW)) dut (.*);

  dram_model #(.DW(DW), .WORDS(1024), .LATENCY(LATENCY), .RANDOM_STALL(1)) u_dram_s (
    .clk, .req_valid(mem_req_valid & stall_mode), .req_ready(rdy_s), .req_write(mem_req_write),
    .req_addr(mem_req_addr), .req_wdata(mem_req_wdata), .rsp_valid(rv_s), .rsp_data(rd_s));
  dram_model #(.DW(DW), .WORDS(1024), .LATENCY(LATENCY), .RANDOM_STALL(0)) u_dram_f (
    .clk, .req_valid(mem_req_valid & !stall_mode), .req_ready(rdy_f), .req_write(mem_req_write),
    .req_addr(mem_req_addr), .req_wdata(mem_req_wdata), .rsp_valid(rv_f), .rsp_data(rd_f));
  logic rdy_s, rdy_f, rv_s, rv_f;
  logic [DW-1:0] rd_s, rd_f;
  assign mem_req_ready = stall_mode ? rdy_s : rdy_f;
  assign mem_rsp_valid = stall_mode ? rv_s : rv_f;
  assign mem_rsp_data  = stall_mode ? rd_s : rd_f;

  always #5 clk = ~clk;

  // input buffer write monitor
  always @(posedge clk) begin
    if (lhs_we) lhs_seen[int'(ib_waddr)] = ib_wdata;
    if (rhs_we) rhs_seen[int'(ib_waddr)] = ib_wdata;
  end
  // output buffer read port model
  always @(posedge clk) begin
    ob_rvalid <= ob_re;
    if (ob_re) ob_rdata <= obm.exists(int'(ob_raddr)) ? obm[int'(ob_raddr)] : '0;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input dma_cmd_t c, output int cycles);
    @(negedge clk);
    cmd = c; cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0;
    cycles = 1;
    while (!done) begin
      @(negedge clk);
      cycles++;
    end
  endtask

  function automatic logic [DW-1:0] rnd_beat();
    logic [DW-1:0] v;
    for (int i = 0; i < DW / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    int cyc;
    dma_cmd_t c;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 1024; i++) begin
      u_dram_f.mem[i] = rnd_beat();
      u_dram_s.mem[i] = u_dram_f.mem[i];
    end
    // load 64 beats into LHS, no stalls: back-to-back requests
    c = '0; c.dram_addr = 100; c.buf_addr = 500; c.len = 64; c.to_rhs = 0;
    run(c, cyc);
    checks++;
    if (cyc > 64 + LATENCY + 4) begin failures++; $display("FAIL load took %0d clocks", cyc); end
    for (int i = 0; i < 64; i++) begin
      checks++;
      if (!lhs_seen.exists(500 + i) || lhs_seen[500 + i] !== u_dram_f.mem[100 + i]) begin
        failures++; $display("FAIL lhs line %0d", 500 + i);
      end
    end
    checks++;
    if (rhs_seen.size() != 0) begin failures++; $display("FAIL rhs written by lhs load"); end
    // load 40 beats into RHS with DRAM back-pressure
    stall_mode = 1;
    c = '0; c.dram_addr = 7; c.buf_addr = 3; c.len = 40; c.to_rhs = 1;
    run(c, cyc);
    for (int i = 0; i < 40; i++) begin
      checks++;
      if (!rhs_seen.exists(3 + i) || rhs_seen[3 + i] !== u_dram_s.mem[7 + i]) begin
        failures++; $display("FAIL rhs line %0d", 3 + i);
      end
    end
    // store 10 output rows, with back-pressure
    for (int r = 0; r < 10; r++) obm[64 + r] = {rnd_beat(), rnd_beat()};
    c = '0; c.store = 1; c.dram_addr = 600; c.buf_addr = 64; c.len = 10;
    run(c, cyc);
    repeat (2) @(negedge clk);
    for (int r = 0; r < 10; r++) begin
      checks += 2;
      if (u_dram_s.mem[600 + 2*r] !== obm[64 + r][DW-1:0]) begin failures++; $display("FAIL store row %0d beat 0", r); end
      if (u_dram_s.mem[601 + 2*r] !== obm[64 + r][2*DW-1:DW]) begin failures++; $display("FAIL store row %0d beat 1", r); end
    end
    // zero-length transfer completes
    c = '0; c.len = 0;
    run(c, cyc);
    checks++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
