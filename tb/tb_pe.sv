// tb_pe: checks one PE against a reference BF16 x BF16 -> FP32 accumulation.
// Runs 200 random dot products of random length (1..40), with the first
// step loading the product, idle cycles (en low) in between that must leave
// the accumulator unchanged, and a few hand-picked cases (zero operands,
// exact cancellation, large exponent differences).
module tb_pe;
  import tb_fp_pkg::*;

  logic        clk = 0, rst_n = 0, en = 0, first = 0;
  logic [15:0] a = 0, b = 0;
  logic [31:0] acc;
  int          checks = 0, failures = 0;

  pe dut (.clk, .rst_n, .en, .first, .a, .b, .acc);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(input logic [15:0] ta, input logic [15:0] tb_, input logic f);
    a = ta; b = tb_; first = f; en = 1;
    @(posedge clk); #1;
    en = 0;
  endtask

  task automatic check(input logic [31:0] exp, input string what);
    checks++;
    if (acc !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, acc, exp);
    end
  endtask

  initial begin
    logic [31:0] r, hold;
    int          k;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    check(32'h0, "reset");
    for (int t = 0; t < 200; t++) begin
      k = 1 + ($urandom % 40);
      r = 0;
      for (int i = 0; i < k; i++) begin
        logic [15:0] x, y;
        logic [31:0] p;
        x = rand_bf16(110, 140);
        y = rand_bf16(110, 140);
        p = ref_mul({x, 16'h0}, {y, 16'h0});
        r = (i == 0) ? p : ref_add(r, p);
        step(x, y, i == 0);
      end
      check(r, $sformatf("dot product %0d (k=%0d)", t, k));
      hold = acc;
      repeat (3) @(posedge clk);
      #1 check(hold, "hold while en low");
    end
    // hand-picked cases
    step(16'h3f80, 16'h4000, 1);   // 1 * 2
    check(32'h4000_0000, "1*2");
    step(16'hbf80, 16'h4000, 0);   // + (-1 * 2) -> exact cancellation
    check(32'h0000_0000, "cancellation");
    step(16'h0000, 16'h4000, 0);   // + 0
    check(32'h0000_0000, "zero operand");
    step(16'h4b80, 16'h3f80, 1);   // 2^24
    step(16'h3f80, 16'h3f80, 0);   // + 1 : tie, rounds to even (2^24)
    check(32'h4b80_0000, "tie to even");
    step(16'h3f80, 16'h3fc0, 0);   // + 1.5 -> 2^24 + 2
    check(32'h4b80_0001, "round up");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
