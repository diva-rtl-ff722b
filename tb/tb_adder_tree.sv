// tb_adder_tree: streams 60 random 128-element vectors through the tree back
// to back (one per clock) with a few bubbles, and checks each sum against a
// reference pairwise reduction, its arrival exactly log2(N) = 7 clocks after
// the input, and one result per clock in steady state.
module tb_adder_tree;
  import tb_fp_pkg::*;
  localparam int N = 128, L = 7, NV = 60;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [N-1:0][31:0] in_vec = '0;
  logic [31:0] sum;
  int checks = 0, failures = 0;
  logic [31:0] expq [$];
  int          tq [$];
  int          cyc = 0;

  adder_tree #(.N(N)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker
  always @(posedge clk) if (rst_n) begin
    #1;
    if (out_valid) begin
      checks += 2;
      if (expq.size() == 0) begin
        failures += 2;
        $display("FAIL unexpected output");
      end else begin
        int t0;
        logic [31:0] e;
        e  = expq.pop_front();
        t0 = tq.pop_front();
        if (sum !== e) begin failures++; $display("FAIL sum got %h exp %h", sum, e); end
        if (cyc - t0 != L) begin failures++; $display("FAIL latency %0d", cyc - t0); end
      end
    end
  end

  initial begin
    logic [31:0] v [];
    v = new[N];
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < NV; n++) begin
      @(negedge clk);
      if (n % 17 == 16) begin
        in_valid = 0;
        @(negedge clk);
      end
      for (int i = 0; i < N; i++) begin
        v[i] = rand_fp32(100, 140);
        in_vec[i] = v[i];
      end
      if (n == 5) for (int i = 0; i < N; i++) in_vec[i] = (i % 2) ? 32'hbf80_0000 : 32'h3f80_0000;
      if (n == 5) for (int i = 0; i < N; i++) v[i] = in_vec[i];
      in_valid = 1;
      expq.push_back(ref_tree(v, N));
      tq.push_back(cyc);
    end
    @(negedge clk);
    in_valid = 0;
    repeat (L + 3) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d results missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
